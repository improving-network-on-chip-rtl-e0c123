// Intrinsic information memory of a processing element.
//
// Stores the channel LLRs of the node's trellis slice, loaded from outside
// before decoding and read by the local SISO. One word per trellis step
// holds six 6-bit LLRs (systematic A, B and the parities of both constituent
// codes for a double-binary code; a binary code uses three of them). The
// paper names the memory and the 6-bit intrinsic format; the word layout
// is this design's choice. Single write port, single registered read port:
// rdata is valid one cycle after raddr.
module intrinsic_mem #(
  parameter int unsigned DEPTH = 96,
  parameter int unsigned WIDTH = 36,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && int'(waddr) < DEPTH) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
