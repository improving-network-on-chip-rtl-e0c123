// Routing Element (RE) of one network node.
//
// M = D + 1 ports: 0..D-1 are the generalized Kautz links, port D the local
// PE (injection on the input side, delivery on the output side). Each input
// has a FIFO; the head of every non-empty FIFO looks up its output port in
// the node's SSP routing table; the arbiter (RR or FL policy) configures the
// M x M crossbar; the selected heads are popped and loaded into the M output
// registers. An output register hands its flit to the next node's FIFO when
// that FIFO is not full (out_full low) and can take a new flit in the same
// cycle, so a link carries one flit per cycle. A flit spends at least two
// cycles per hop: one in the FIFO, one in the output register.
//
// Interface: in_valid/in_flit are the neighbours' output registers,
// in_full is this RE's back-pressure to them (a flit is taken when
// in_valid && !in_full); out_valid/out_flit are the output registers,
// out_full the back-pressure from the next FIFOs. Structure (FIFOs, crossbar
// configured by the RA, output registers) follows the paper's RE; the
// hand-over protocol and the port numbering are this design's.
//
// There are no escape channels. A cycle of full FIFOs whose heads wait on
// each other would stall for good, so FIFO_DEPTH must be sized for the
// traffic. Depth 8 never locked with degree 4 in simulation; degree 3
// needed 32 and degree 2 needed 64.
module routing_element
  import turbo_noc_pkg::*;
#(
  parameter int unsigned P          = 64,
  parameter int unsigned D          = 4,
  parameter int unsigned NODE       = 0,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter ra_policy_e  RA         = RA_FL,
  localparam int unsigned M         = D + 1,
  localparam int unsigned CW        = $clog2(FIFO_DEPTH + 1)
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [M-1:0] in_valid,
  input  flit_t        in_flit  [M],
  output logic [M-1:0] in_full,
  output logic [M-1:0] out_valid,
  output flit_t        out_flit [M],
  input  logic [M-1:0] out_full,
  output logic         busy
);

  flit_t             head      [M];
  logic [M-1:0]      empty;
  logic [CW-1:0]     count     [M];
  logic [PORT_W-1:0] req_port  [M];
  logic [M-1:0]      grant;
  logic [M-1:0]      out_load;
  logic [PORT_W-1:0] out_sel   [M];
  logic [M-1:0]      out_ready;

  for (genvar i = 0; i < M; i++) begin : g_in
    re_fifo #(.WIDTH(FLIT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk   (clk),
      .rst   (rst),
      .push  (in_valid[i] && !in_full[i]),
      .din   (in_flit[i]),
      .pop   (grant[i]),
      .dout  (head[i]),
      .full  (in_full[i]),
      .empty (empty[i]),
      .count (count[i])
    );

    routing_table #(.P(P), .D(D), .NODE(NODE)) u_rt (
      .dest   (head[i].dest),
      .port_o (req_port[i])
    );
  end

  assign out_ready = ~out_valid | ~out_full;

  re_arbiter #(.M(M), .RA(RA), .CW(CW)) u_ra (
    .clk       (clk),
    .rst       (rst),
    .req_valid (~empty),
    .req_port  (req_port),
    .req_count (count),
    .out_ready (out_ready),
    .grant     (grant),
    .out_load  (out_load),
    .out_sel   (out_sel)
  );

  // Crossbar and output registers.
  for (genvar o = 0; o < M; o++) begin : g_out
    always_ff @(posedge clk) begin
      if (rst) begin
        out_valid[o] <= 1'b0;
      end else if (out_load[o]) begin
        out_valid[o] <= 1'b1;
      end else if (!out_full[o]) begin
        out_valid[o] <= 1'b0;
      end
    end

    always_ff @(posedge clk) begin
      if (out_load[o]) out_flit[o] <= head[out_sel[o]];
    end
  end

  assign busy = (~empty != '0) || (out_valid != '0);

endmodule
