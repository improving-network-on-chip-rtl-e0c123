// Routing algorithm (RA) of a Routing Element: allocation of the M x M
// crossbar for one clock cycle.
//
// Each input FIFO head asks for one output port (req_port, from the routing
// table). The inputs are visited in a priority order and each takes its
// output if that output register can be loaded (out_ready) and no input
// visited earlier took it. The priority order is the routing policy:
//   RA_RR  round robin: starting from a pointer that moves, after every
//          cycle with a grant, to the input following the first one served;
//   RA_FL  FIFO length: inputs sorted by occupancy, fullest first, ties to
//          the lower index.
// Outputs: `grant` is the read enable of each FIFO, `out_load` the load
// enable of each output register and `out_sel` the crossbar configuration
// (which input feeds each output). Allocation is combinational, so an RE
// completes routing in one cycle, as the paper requires of its RAs; only the
// round-robin pointer is state. The greedy one-pass allocation and the tie
// and pointer rules are this design's reading of "serves them in order".
module re_arbiter
  import turbo_noc_pkg::*;
#(
  parameter int unsigned M    = 5,
  parameter ra_policy_e  RA   = RA_FL,
  parameter int unsigned CW   = 4
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [M-1:0]      req_valid,
  input  logic [PORT_W-1:0] req_port  [M],
  input  logic [CW-1:0]     req_count [M],
  input  logic [M-1:0]      out_ready,
  output logic [M-1:0]      grant,
  output logic [M-1:0]      out_load,
  output logic [PORT_W-1:0] out_sel   [M]
);

  logic [PORT_W-1:0] rr_ptr;
  logic [PORT_W-1:0] order [M];     // order[r] = input served r-th
  logic [M-1:0]      taken;
  logic [PORT_W-1:0] first_grant;
  logic              any_grant;

  // Priority order.
  always_comb begin
    for (int r = 0; r < M; r++) order[r] = '0;
    if (RA == RA_RR) begin
      for (int r = 0; r < M; r++)
        order[r] = PORT_W'((int'(rr_ptr) + r) % M);
    end else begin
      for (int i = 0; i < M; i++) begin
        int rank;
        rank = 0;
        for (int j = 0; j < M; j++)
          if ((req_count[j] > req_count[i]) || (req_count[j] == req_count[i] && j < i))
            rank++;
        order[rank] = PORT_W'(i);
      end
    end
  end

  // Greedy allocation in priority order.
  always_comb begin
    grant       = '0;
    out_load    = '0;
    taken       = '0;
    any_grant   = 1'b0;
    first_grant = '0;
    for (int o = 0; o < M; o++) out_sel[o] = '0;
    for (int r = 0; r < M; r++) begin
      logic [PORT_W-1:0] i;
      logic [PORT_W-1:0] o;
      i = order[r];
      o = req_port[i];
      if (req_valid[i] && int'(o) < M && out_ready[o] && !taken[o]) begin
        taken[o]    = 1'b1;
        grant[i]    = 1'b1;
        out_load[o] = 1'b1;
        out_sel[o]  = i;
        if (!any_grant) first_grant = i;
        any_grant   = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) rr_ptr <= '0;
    else if (RA == RA_RR && any_grant)
      rr_ptr <= (first_grant == PORT_W'(M - 1)) ? '0 : first_grant + 1'b1;
  end

  // At most one input per output and every grant has a loaded output.
  a_one_per_output: assert property (@(posedge clk) disable iff (rst)
                                     $countones(grant) == $countones(out_load));

endmodule
