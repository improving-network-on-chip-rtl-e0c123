// Self-checking test of one noc_node (node 5 of an 8-node degree-2
// network), its links driven and observed by the testbench.
//  1. Double-binary values addressed to the node itself loop through the
//     RE into its own a-priori memory; after the bank swap they read back
//     as the reference BL->PFP->BL->SL values.
//  2. Values for other nodes leave on a link one hop closer to their
//     destination, with the reference PFP payload and the given location.
//  3. Flits arriving on a link for this node are written to memory.
//  4. ABR: values meeting the criterion produce no flit and pulse abr_skip.
//  5. Binary mode carries the 8-bit LLR unchanged.
//  6. With the links blocked the injection FIFO fills and ext_ready drops.
module tb_noc_node;
  import turbo_noc_pkg::*;
  import tb_ref_pkg::*;

  localparam int P = 8, D = 2, NODE = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic db_mode, half, apr_clear;
  logic [K_W-1:0] k_thr;
  logic [D-1:0] link_in_valid, link_in_full, link_out_valid, link_out_full;
  flit_t link_in_flit [D];
  flit_t link_out_flit [D];
  logic ext_valid, ext_ready;
  sl_llr_t ext, ext_apr, apr_rdata;
  logic [DEST_W-1:0] ext_dest;
  logic [LOC_W-1:0] ext_loc, apr_raddr, intr_waddr, intr_raddr;
  logic intr_we;
  logic [35:0] intr_wdata, intr_rdata;
  logic abr_skip, rx_valid, busy;
  int hops [P][P];
  int exp_a [96];
  int exp_b [96];
  flit_t seen [$];
  int seen_port [$];

  noc_node #(.P(P), .D(D), .NODE(NODE), .FIFO_DEPTH(4)) dut (.*);

  always #5 clk = ~clk;

  function automatic int nxt(int i, int k);
    return ((-(D * i + k + 1)) % P + P) % P;
  endfunction

  always @(posedge clk) if (!rst)
    for (int k = 0; k < D; k++) if (link_out_valid[k] && !link_out_full[k]) begin
      seen.push_back(link_out_flit[k]);
      seen_port.push_back(k);
    end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input sl_llr_t e, input sl_llr_t a, input int dst, input int loc, output bit skipped);
    @(negedge clk);
    ext = e; ext_apr = a; ext_dest = DEST_W'(dst); ext_loc = LOC_W'(loc); ext_valid = 1;
    #4;
    while (!ext_ready) begin @(negedge clk); #4; end
    skipped = abr_skip;
    @(posedge clk); #1;
    ext_valid = 0;
  endtask

  function automatic sl_llr_t rsl();
    return '{llr_t'($urandom), llr_t'($urandom), llr_t'($urandom)};
  endfunction

  initial begin
    bit sk, changed;
    int a, b, ra, rb, s, xa, xb, e01, e10, e11;
    sl_llr_t e;
    for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) hops[i][j] = (i == j) ? 0 : 1000;
    do begin
      changed = 0;
      for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) for (int k = 0; k < D; k++)
        if (hops[nxt(i, k)][j] + 1 < hops[i][j]) begin hops[i][j] = hops[nxt(i, k)][j] + 1; changed = 1; end
    end while (changed);
    for (int t = 0; t < 96; t++) begin exp_a[t] = 0; exp_b[t] = 0; end

    db_mode = 1; half = 0; apr_clear = 0; k_thr = '0;
    link_in_valid = '0; link_out_full = '0; ext_valid = 0; ext = '0; ext_apr = '0;
    ext_dest = '0; ext_loc = '0; apr_raddr = '0; intr_we = 0; intr_waddr = '0; intr_raddr = '0; intr_wdata = '0;
    for (int k = 0; k < D; k++) link_in_flit[k] = '0;
    repeat (2) @(posedge clk);
    rst = 0;

    // 1 + 2: double-binary values, half to self, half to others
    for (int n = 0; n < 40; n++) begin
      int dst;
      e = rsl();
      dst = (n % 2) ? NODE : (NODE + 1 + n % (P - 1)) % P;
      send(e, '0, dst, n, sk);
      checks++; if (sk) failures++;
      sl2bl(s8(e.l01), s8(e.l10), s8(e.l11), a, b);
      pfp_round_trip(a, b, ra, rb, s, xa, xb);
      if (dst == NODE) begin exp_a[n] = ra; exp_b[n] = rb; end
      else begin
        flit_t f;
        repeat (4) @(posedge clk);
        #1;
        checks++;
        if (seen.size() != 1) begin failures++; $display("flit %0d not seen on a link", n); end
        else begin
          int k;
          f = seen.pop_front();
          k = seen_port.pop_front();
          if (int'(f.dest) != dst || int'(f.loc) != n || pfp_t'(f.payload) != pfp_t'({3'(s), 4'(xa), 4'(xb)}) ||
              hops[nxt(NODE, k)][dst] != hops[NODE][dst] - 1) begin
            failures++;
            $display("flit %0d: port %0d dest %0d loc %0d payload %h", n, k, f.dest, f.loc, f.payload);
          end
        end
      end
    end
    // 3: flits from a link for this node
    for (int n = 40; n < 60; n++) begin
      pfp_t pf;
      @(negedge clk);
      pf.sigma = 3'($urandom_range(4)); pf.xi_a = 4'($urandom); pf.xi_b = 4'($urandom);
      link_in_valid[n % D] = 1;
      link_in_flit[n % D] = '{dest: DEST_W'(NODE), loc: LOC_W'(n), payload: PAYLOAD_W'(pf)};
      exp_a[n] = s8({{4{pf.xi_a[3]}}, pf.xi_a}) * (2 ** (4 - int'(pf.sigma)));
      exp_b[n] = s8({{4{pf.xi_b[3]}}, pf.xi_b}) * (2 ** (4 - int'(pf.sigma)));
      @(posedge clk); #1;
      link_in_valid = '0;
    end
    repeat (10) @(posedge clk);
    @(negedge clk); half = 1;
    for (int t = 0; t < 60; t++) begin
      @(negedge clk); apr_raddr = LOC_W'(t);
      @(posedge clk); #1;
      bl2sl(exp_a[t], exp_b[t], e01, e10, e11);
      checks++;
      if (s8(apr_rdata.l01) != e01 || s8(apr_rdata.l10) != e10 || s8(apr_rdata.l11) != e11) begin
        failures++;
        $display("addr %0d: got %p exp %0d %0d %0d", t, apr_rdata, e01, e10, e11);
      end
    end
    // 4: ABR drop (ext equals apr, Phi = 0 < K)
    k_thr = 8'd6;
    seen.delete(); seen_port.delete();
    for (int n = 0; n < 10; n++) begin
      e = rsl();
      send(e, e, (NODE + 1) % P, n, sk);
      checks++; if (!sk) failures++;
    end
    repeat (6) @(posedge clk);
    checks++; if (seen.size() != 0 || busy) failures++;
    // 5: binary mode, value to a neighbour
    db_mode = 0; k_thr = 0;
    e = rsl();
    send(e, '0, nxt(NODE, 1), 7, sk);
    repeat (4) @(posedge clk); #1;
    checks++;
    if (seen.size() != 1 || seen[0].payload != PAYLOAD_W'(unsigned'(e.l01)) || seen_port[0] != 1) begin
      failures++; $display("binary payload wrong: %0d seen, port %0d payload %h exp %h", seen.size(), seen.size() ? seen_port[0] : -1, seen.size() ? seen[0].payload : 0, e.l01);
    end
    // 6: stall with blocked links
    link_out_full = '1;
    begin
      int accepted;
      accepted = 0;
      @(negedge clk);
      ext_valid = 1; ext_dest = DEST_W'(nxt(NODE, 1)); ext_loc = '0; ext = rsl(); ext_apr = '0;
      for (int c = 0; c < 20; c++) begin
        #4;
        if (ext_ready) accepted++;
        @(negedge clk);
      end
      ext_valid = 0;
      checks++;
      // 4 FIFO entries plus one output register, then ready must stay low
      if (accepted != 5 || ext_ready) begin failures++; $display("stall: accepted %0d", accepted); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
