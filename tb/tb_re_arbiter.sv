// Self-checking test of re_arbiter for both routing policies. Random
// requests, occupancies and output readiness drive an RR and an FL
// instance; a reference model builds the serving order (round-robin
// pointer, or occupancy-sorted list) and performs the greedy allocation;
// grants, output loads and crossbar selects must match every cycle.
module tb_re_arbiter;
  import turbo_noc_pkg::*;
  int checks = 0, failures = 0;
  localparam int M = 5, CW = 4;
  logic clk = 0, rst = 1;
  logic [M-1:0] req_valid, out_ready;
  logic [PORT_W-1:0] req_port [M];
  logic [CW-1:0] req_count [M];
  logic [M-1:0] g_rr, l_rr, g_fl, l_fl;
  logic [PORT_W-1:0] s_rr [M];
  logic [PORT_W-1:0] s_fl [M];
  int ptr;
  int n_conflict = 0;

  re_arbiter #(.M(M), .RA(RA_RR), .CW(CW)) u_rr (.clk, .rst, .req_valid, .req_port, .req_count, .out_ready,
                                                 .grant(g_rr), .out_load(l_rr), .out_sel(s_rr));
  re_arbiter #(.M(M), .RA(RA_FL), .CW(CW)) u_fl (.clk, .rst, .req_valid, .req_port, .req_count, .out_ready,
                                                 .grant(g_fl), .out_load(l_fl), .out_sel(s_fl));

  always #5 clk = ~clk;

  task automatic alloc(input int ord [M], output logic [M-1:0] g, output logic [M-1:0] l, output int sel [M], output int first);
    g = '0; l = '0; first = -1;
    for (int o = 0; o < M; o++) sel[o] = 0;
    for (int r = 0; r < M; r++) begin
      int i, o;
      i = ord[r];
      o = int'(req_port[i]);
      if (req_valid[i] && out_ready[o] && !l[o]) begin
        l[o] = 1; g[i] = 1; sel[o] = i;
        if (first < 0) first = i;
      end
    end
  endtask

  task automatic compare(string tag, logic [M-1:0] g, logic [M-1:0] l, int sel [M],
                         logic [M-1:0] gd, logic [M-1:0] ld, logic [PORT_W-1:0] sd [M]);
    checks++;
    if (g != gd || l != ld) begin
      failures++;
      if (failures < 10) $display("%s: grant %b/%b load %b/%b", tag, gd, g, ld, l);
    end
    for (int o = 0; o < M; o++)
      if (l[o] && int'(sd[o]) != sel[o]) begin
        failures++;
        if (failures < 10) $display("%s: sel[%0d] %0d exp %0d", tag, o, sd[o], sel[o]);
      end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ord [M];
    int sel [M];
    logic [M-1:0] g, l;
    int first;
    bit used [M];
    req_valid = '0; out_ready = '0;
    for (int i = 0; i < M; i++) begin req_port[i] = '0; req_count[i] = '0; end
    ptr = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < M; i++) begin
        req_valid[i] = $urandom_range(99) < 70;
        req_port[i]  = PORT_W'($urandom_range(M - 1));
        req_count[i] = req_valid[i] ? CW'($urandom_range(1, 8)) : '0;
      end
      out_ready = M'($urandom);
      #1;
      // RR order from the model pointer
      for (int r = 0; r < M; r++) ord[r] = (ptr + r) % M;
      alloc(ord, g, l, sel, first);
      compare("RR", g, l, sel, g_rr, l_rr, s_rr);
      if (first >= 0) ptr = (first + 1) % M;
      // FL order: repeatedly pick the unused input with the largest count
      for (int i = 0; i < M; i++) used[i] = 0;
      for (int r = 0; r < M; r++) begin
        int b;
        b = -1;
        for (int i = 0; i < M; i++)
          if (!used[i] && (b < 0 || req_count[i] > req_count[b])) b = i;
        used[b] = 1;
        ord[r] = b;
      end
      alloc(ord, g, l, sel, first);
      compare("FL", g, l, sel, g_fl, l_fl, s_fl);
      if (g_rr != g_fl) n_conflict++;
    end
    checks++;
    if (n_conflict == 0) failures++;   // the policies must differ sometimes
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
