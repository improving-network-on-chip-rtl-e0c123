// End-to-end test of noc_turbo_decoder at its default size (64 nodes,
// degree-4 generalized Kautz network, FIFO-length routing).
//
// Every node is driven by a synthetic SISO that emits one extrinsic value
// per trellis step of its slice (R = 1, or R = 0.5 in one half iteration),
// with a random a-priori value and a destination d = Theta(k) / W and
// location t = Theta(k) mod W from an affine permutation
// Theta(k) = (a*k + b) mod N that stands in for the standard interleaver.
// A model of all a-priori memories, written with integer reference
// arithmetic, follows every accepted value that the ABR criterion does not
// drop. After each half iteration the banks are swapped and every memory
// location of every node is read back and compared.
//
// Frames: HSDPA-sized binary (N = 5114, W = 80) for three half iterations,
// no ABR then K = 10; WiMAX-sized double-binary (N = 1920, W = 30) for three
// half iterations, no ABR then K = 4 and K = 6, one at R = 0.5; an LTE-sized
// binary half iteration (N = 6144, W = 96). Counted mechanisms: ABR drops in
// both modes, SISO stalls on a full injection FIFO, output back-pressure
// inside the network, mode switches, bank swaps, memory clears and
// intrinsic memory loads. Each must occur.
// Cycle counts of the half iterations without ABR at R = 1 are compared
// with the budget implied by the paper's SSP-FL, D = 4, P = 64 throughputs
// (f = 200 MHz, I = 8): measured <= 2 x budget.
module tb_noc_turbo_decoder;
  import turbo_noc_pkg::*;
  import tb_ref_pkg::*;

  localparam int P = 64, D = 4, MEM_DEPTH = 96, INTR_W = 36;

  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic db_mode, half, apr_clear;
  logic [K_W-1:0] k_thr;
  logic [P-1:0] ext_valid, ext_ready;
  sl_llr_t ext [P];
  sl_llr_t ext_apr [P];
  logic [DEST_W-1:0] ext_dest [P];
  logic [LOC_W-1:0] ext_loc [P];
  logic [LOC_W-1:0] apr_raddr [P];
  sl_llr_t apr_rdata [P];
  logic [P-1:0] intr_we;
  logic [LOC_W-1:0] intr_waddr [P];
  logic [INTR_W-1:0] intr_wdata [P];
  logic [LOC_W-1:0] intr_raddr [P];
  logic [INTR_W-1:0] intr_rdata [P];
  logic [P-1:0] abr_skip, rx_valid;
  logic net_idle;

  noc_turbo_decoder dut (.*);

  always #5 clk = ~clk;

  // model of the stored bit-level pairs: [bank][node][addr]
  int mem_a [2][P][MEM_DEPTH];
  int mem_b [2][P][MEM_DEPTH];

  // mechanism counters
  int n_skip_bin = 0, n_skip_db = 0, n_stall = 0, n_backpressure = 0;
  int n_mode_switch = 0, n_swap = 0, n_clear = 0, n_intr = 0, n_sent = 0, n_delivered = 0;

  // back-pressure on any network link (an output register held by a full FIFO)
  always @(posedge clk) if (!rst) begin
    for (int i = 0; i < P; i++) n_delivered += int'(rx_valid[i]);
    for (int j = 0; j < P; j++)
      if ((dut.lo_valid[j] & dut.lo_full[j]) != '0) n_backpressure++;
  end

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic llr_t rl(int span);
    return llr_t'(int'($urandom_range(2 * span)) - span);
  endfunction

  task automatic clear_model();
    for (int b = 0; b < 2; b++) for (int i = 0; i < P; i++) for (int t = 0; t < MEM_DEPTH; t++) begin
      mem_a[b][i][t] = 0;
      mem_b[b][i][t] = 0;
    end
  endtask

  task automatic set_mode(bit db);
    if (db_mode !== db) n_mode_switch++;
    db_mode = db;
  endtask

  task automatic pulse_clear();
    @(negedge clk);
    apr_clear = 1;
    @(negedge clk);
    apr_clear = 0;
    clear_model();
    n_clear++;
  endtask

  task automatic swap_banks();
    @(negedge clk);
    half = ~half;
    n_swap++;
  endtask

  // One half iteration: every node emits its W values.
  task automatic run_half(input bit db, input int k, input int n, input int w,
                          input int amul, input int badd, input int rate_pct, output int cycles);
    int idx [P];
    int cnt [P];
    logic [P-1:0] acc;
    int busy_tail;
    bit done;
    k_thr = K_W'(k);
    for (int i = 0; i < P; i++) begin
      idx[i] = 0;
      cnt[i] = (n - i * w >= w) ? w : ((n - i * w > 0) ? n - i * w : 0);
    end
    cycles = 0;
    busy_tail = 0;
    done = 0;
    while (!done) begin
      @(negedge clk);
      cycles++;
      for (int i = 0; i < P; i++) begin
        if (!ext_valid[i] && idx[i] < cnt[i] && int'($urandom_range(99)) < rate_pct) begin
          int kk, th;
          kk = i * w + idx[i];
          th = int'((longint'(amul) * kk + badd) % n);
          ext_apr[i] = '{rl(60), rl(60), rl(60)};
          if ($urandom_range(1)) ext[i] = '{rl(127), rl(127), rl(127)};
          else ext[i] = '{llr_t'(s8(ext_apr[i].l01) + int'($urandom_range(6)) - 3),
                          llr_t'(s8(ext_apr[i].l10) + int'($urandom_range(6)) - 3),
                          llr_t'(s8(ext_apr[i].l11) + int'($urandom_range(6)) - 3)};
          ext_dest[i]  = DEST_W'(th / w);
          ext_loc[i]   = LOC_W'(th % w);
          ext_valid[i] = 1;
        end
      end
      #4;
      acc = ext_valid & ext_ready;
      for (int i = 0; i < P; i++) begin
        if (ext_valid[i] && !ext_ready[i]) n_stall++;
        if (acc[i]) begin
          bit sk;
          sk = skip(db, k, s8(ext[i].l01), s8(ext[i].l10), s8(ext[i].l11),
                    s8(ext_apr[i].l01), s8(ext_apr[i].l10), s8(ext_apr[i].l11));
          checks++;
          if (sk != abr_skip[i]) begin
            failures++;
            if (failures < 10) $display("node %0d: abr_skip %0d expected %0d", i, abr_skip[i], sk);
          end
          if (sk) begin
            if (db) n_skip_db++; else n_skip_bin++;
          end else begin
            int a, b, ra, rb, s, xa, xb;
            n_sent++;
            if (db) begin
              sl2bl(s8(ext[i].l01), s8(ext[i].l10), s8(ext[i].l11), a, b);
              pfp_round_trip(a, b, ra, rb, s, xa, xb);
            end else begin
              ra = s8(ext[i].l01);
              rb = 0;
            end
            mem_a[!half][ext_dest[i]][ext_loc[i]] = ra;
            mem_b[!half][ext_dest[i]][ext_loc[i]] = rb;
          end
        end
      end
      @(posedge clk);
      #1;
      for (int i = 0; i < P; i++) if (acc[i]) begin
        ext_valid[i] = 0;
        idx[i]++;
      end
      done = 1;
      for (int i = 0; i < P; i++) if (idx[i] < cnt[i] || ext_valid[i]) done = 0;
      if (done && !net_idle) done = 0;
    end
  endtask

  // Read every location of every node (current bank) and compare.
  task automatic check_mems(input bit db, input int w);
    for (int t = 0; t < w; t++) begin
      @(negedge clk);
      for (int i = 0; i < P; i++) apr_raddr[i] = LOC_W'(t);
      @(posedge clk);
      #1;
      for (int i = 0; i < P; i++) begin
        int e01, e10, e11;
        if (db) bl2sl(mem_a[half][i][t], mem_b[half][i][t], e01, e10, e11);
        else begin e01 = mem_a[half][i][t]; e10 = 0; e11 = 0; end
        checks++;
        if (s8(apr_rdata[i].l01) != e01 || s8(apr_rdata[i].l10) != e10 || s8(apr_rdata[i].l11) != e11) begin
          failures++;
          if (failures < 10) $display("node %0d addr %0d: got %0d %0d %0d exp %0d %0d %0d", i, t,
                                      s8(apr_rdata[i].l01), s8(apr_rdata[i].l10), s8(apr_rdata[i].l11), e01, e10, e11);
        end
      end
    end
  endtask

  task automatic budget_check(string name, int cycles, int nb, int mbps);
    real budget;
    budget = real'(nb) * 200.0 / (8.0 * 2.0 * real'(mbps));
    $display("%s: %0d cycles per half iteration (paper-derived budget %0.1f), %0.1f Mb/s at 200 MHz, I = 8",
             name, cycles, budget, real'(nb) * 200.0 / (8.0 * 2.0 * real'(cycles)));
    checks++;
    if (real'(cycles) > 2.0 * budget) begin
      failures++;
      $display("%s: too slow", name);
    end
  endtask

  initial begin
    int cyc;
    db_mode = 0; half = 0; apr_clear = 0; k_thr = '0;
    ext_valid = '0; intr_we = '0;
    for (int i = 0; i < P; i++) begin
      ext[i] = '0; ext_apr[i] = '0; ext_dest[i] = '0; ext_loc[i] = '0; apr_raddr[i] = '0;
      intr_waddr[i] = '0; intr_wdata[i] = '0; intr_raddr[i] = '0;
    end
    repeat (3) @(posedge clk);
    rst = 0;

    // intrinsic memories: load one word per node and read it back
    @(negedge clk);
    for (int i = 0; i < P; i++) begin
      intr_we[i] = 1; intr_waddr[i] = LOC_W'(i % MEM_DEPTH); intr_wdata[i] = {i[3:0], 32'hC0DE0000 + i};
      intr_raddr[i] = LOC_W'(i % MEM_DEPTH);
    end
    @(negedge clk);
    intr_we = '0;
    n_intr++;
    @(negedge clk);
    for (int i = 0; i < P; i++) begin
      checks++;
      if (intr_rdata[i] != {i[3:0], 32'hC0DE0000 + i}) failures++;
    end

    // ---- binary frame, HSDPA size ----
    set_mode(0);
    pulse_clear();
    run_half(0, 0, 5114, 80, 1009, 17, 100, cyc);
    budget_check("HSDPA N=5114 binary, no ABR", cyc, 5114, 372);
    swap_banks(); check_mems(0, 80);
    run_half(0, 0, 5114, 80, 3001, 5, 100, cyc);
    $display("HSDPA half iteration 2 (no ABR): %0d cycles", cyc);
    swap_banks(); check_mems(0, 80);
    run_half(0, 10, 5114, 80, 1009, 17, 100, cyc);
    $display("HSDPA half iteration 3 (K = 10): %0d cycles", cyc);
    swap_banks(); check_mems(0, 80);

    // ---- double-binary frame, WiMAX size ----
    set_mode(1);
    pulse_clear();
    run_half(1, 0, 1920, 30, 77, 3, 100, cyc);
    budget_check("WiMAX N=1920 double-binary, no ABR", cyc, 3840, 533);
    swap_banks(); check_mems(1, 30);
    run_half(1, 4, 1920, 30, 1201, 11, 50, cyc);
    $display("WiMAX half iteration 2 (K = 4, R = 0.5): %0d cycles", cyc);
    swap_banks(); check_mems(1, 30);
    run_half(1, 6, 1920, 30, 77, 3, 100, cyc);
    $display("WiMAX half iteration 3 (K = 6): %0d cycles", cyc);
    swap_banks(); check_mems(1, 30);

    // ---- binary, LTE size ----
    set_mode(0);
    pulse_clear();
    run_half(0, 0, 6144, 96, 2011, 29, 100, cyc);
    budget_check("LTE N=6144 binary, no ABR", cyc, 6144, 312);
    swap_banks(); check_mems(0, 96);

    $display("mechanisms: ABR drops binary %0d double-binary %0d, SISO stalls %0d, link back-pressure %0d,",
             n_skip_bin, n_skip_db, n_stall, n_backpressure);
    $display("            mode switches %0d, bank swaps %0d, clears %0d, intrinsic loads %0d, sent %0d, delivered %0d",
             n_mode_switch, n_swap, n_clear, n_intr, n_sent, n_delivered);
    checks++; if (n_skip_bin == 0) failures++;
    checks++; if (n_skip_db == 0) failures++;
    checks++; if (n_stall == 0) failures++;
    checks++; if (n_backpressure == 0) failures++;
    checks++; if (n_mode_switch < 2) failures++;
    checks++; if (n_swap == 0) failures++;
    checks++; if (n_clear == 0) failures++;
    checks++; if (n_intr == 0) failures++;
    checks++; if (n_sent != n_delivered) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
