// Self-checking test of routing_element (node 3 of an 8-node degree-2
// generalized Kautz network, 3 ports). Random flits with unique tags are
// offered on every input, holding each until the RE accepts it; the
// outputs are back-pressured at random. Every flit must leave exactly
// once, on a port that is the local port for this node's own address or
// a link one hop closer to its destination (distances computed here).
// A lone flit must cross the idle RE in two cycles.
module tb_routing_element;
  import turbo_noc_pkg::*;
  int checks = 0, failures = 0;
  localparam int P = 8, D = 2, NODE = 3, M = D + 1;
  logic clk = 0, rst = 1;
  logic [M-1:0] in_valid, in_full, out_valid, out_full;
  flit_t in_flit [M];
  flit_t out_flit [M];
  logic busy;
  int hops [P][P];
  int outstanding [int];     // tag -> destination
  logic [M-1:0] acc;
  int tag_cnt = 0, n_out = 0, bp_cycles = 0;

  routing_element #(.P(P), .D(D), .NODE(NODE), .FIFO_DEPTH(4), .RA(RA_FL)) dut (
    .clk, .rst, .in_valid, .in_flit, .in_full, .out_valid, .out_flit, .out_full, .busy);

  always #5 clk = ~clk;

  function automatic int nxt(int i, int k);
    return ((-(D * i + k + 1)) % P + P) % P;
  endfunction

  function automatic flit_t mk(int dst);
    flit_t f;
    f.dest = DEST_W'(dst);
    f.loc = LOC_W'(tag_cnt >> PAYLOAD_W);
    f.payload = PAYLOAD_W'(tag_cnt);
    outstanding[tag_cnt] = dst;
    tag_cnt++;
    return f;
  endfunction

  // Check every flit leaving the RE.
  always @(posedge clk) if (!rst) begin
    for (int o = 0; o < M; o++) if (out_valid[o] && !out_full[o]) begin
      int tag, dst;
      tag = {out_flit[o].loc, out_flit[o].payload};
      checks++;
      n_out++;
      if (!outstanding.exists(tag)) begin
        failures++;
        $display("unknown or duplicated flit tag %0d on port %0d", tag, o);
      end else begin
        dst = outstanding[tag];
        outstanding.delete(tag);
        if (dst == NODE ? o != D : (o >= D || hops[nxt(NODE, o)][dst] != hops[NODE][dst] - 1)) begin
          failures++;
          $display("flit %0d to node %0d left on port %0d", tag, dst, o);
        end
      end
    end
    if (out_valid != '0 && (out_valid & out_full) != '0) bp_cycles++;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit changed;
    for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) hops[i][j] = (i == j) ? 0 : 1000;
    do begin
      changed = 0;
      for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) for (int k = 0; k < D; k++)
        if (hops[nxt(i, k)][j] + 1 < hops[i][j]) begin hops[i][j] = hops[nxt(i, k)][j] + 1; changed = 1; end
    end while (changed);

    in_valid = '0; out_full = '0;
    for (int i = 0; i < M; i++) in_flit[i] = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    // latency of a lone flit: accepted at edge 1, in the output register after edge 2
    @(negedge clk);
    in_valid[0] = 1; in_flit[0] = mk(NODE);
    @(posedge clk); #1;
    in_valid[0] = 0;
    checks++;
    if (out_valid[D]) failures++;
    @(posedge clk); #1;
    checks++;
    if (!out_valid[D]) begin failures++; $display("two-cycle crossing failed"); end
    repeat (3) @(posedge clk);
    // random traffic
    for (int cyc = 0; cyc < 6000; cyc++) begin
      @(negedge clk);
      out_full = (cyc % 1000 < 500) ? M'($urandom) & M'($urandom) : '0;
      for (int i = 0; i < M; i++) begin
        if (!in_valid[i] && $urandom_range(99) < 60) begin
          in_valid[i] = 1;
          in_flit[i] = mk($urandom_range(P - 1));
        end
      end
      #4;
      acc = in_valid & ~in_full;
      @(posedge clk);
      #1;
      in_valid = in_valid & ~acc;
    end
    @(negedge clk);
    in_valid = '0; out_full = '0;
    repeat (100) @(posedge clk);
    // one check per flit sent: each must have left the RE by now
    checks += tag_cnt;
    failures += outstanding.size();
    if (outstanding.size() != 0) $display("%0d flits lost", outstanding.size());
    checks++;
    if (busy) begin failures++; $display("RE still busy after draining"); end
    checks = checks + 1;
    if (bp_cycles == 0) failures = failures + 1;
    $display("flits routed %0d, back-pressured cycles %0d", n_out, bp_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
