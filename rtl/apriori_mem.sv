// A-priori information memory of a processing element.
//
// Holds, for each trellis step t of the node's slice, the extrinsic value
// received from the network, which the local SISO reads as a-priori
// information in the next half iteration. Two banks alternate: during a
// half iteration with parity `half` the SISO reads bank `half` while the
// network writes bank ~half, so a value arriving early never overwrites one
// still to be read. A slot that receives nothing (its sender dropped the
// value under ABR) keeps what it held two half iterations before, which is
// the last value sent for that same slot. A valid bit per entry, cleared by
// `clear` (start of a frame) or reset, makes unwritten entries read as zero,
// the a-priori value of the first iteration.
//
// Read data is registered: rdata is valid one cycle after raddr. Writes take
// effect at the clock edge. The paper names the memory; the two banks, the
// valid bits and the timing are this design's choices.
module apriori_mem #(
  parameter int unsigned DEPTH = 96,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             clear,
  input  logic             half,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [2*DEPTH];
  logic [DEPTH-1:0] vld [2];
  logic [WIDTH-1:0] rd_q;
  logic             rd_vld_q;

  function automatic int unsigned index(logic bank, logic [AW-1:0] a);
    return (bank ? DEPTH : 0) + int'(a);
  endfunction

  always_ff @(posedge clk) begin
    if (we && int'(waddr) < DEPTH) mem[index(~half, waddr)] <= wdata;
    rd_q <= mem[index(half, raddr)];
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      vld[0]   <= '0;
      vld[1]   <= '0;
      rd_vld_q <= 1'b0;
    end else begin
      if (we && int'(waddr) < DEPTH) vld[~half][waddr] <= 1'b1;
      rd_vld_q <= (int'(raddr) < DEPTH) && vld[half][raddr];
    end
  end

  assign rdata = rd_vld_q ? rd_q : '0;

endmodule
