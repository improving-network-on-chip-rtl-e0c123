// NoC-based turbo decoder interconnect: P fully-adaptive nodes on a
// generalized Kautz network of degree D.
//
// In a parallel turbo decoder P SISO processors each work on N/P trellis
// steps. After each step a SISO emits an extrinsic value that must reach
// the a-priori memory of another SISO, chosen by the interleaver:
// node d(i,j), location t(i,j). This block is the network that does this
// exchange. It accepts one value per node per cycle (R = 1) when not
// back-pressured, drops values the ABR criterion deems reliable, and
// delivers the rest in any order to the right memory slot. The SISOs, and
// the interleaver address generators that supply d and t, are outside; their
// signals are ports.
//
// Node i's output link k (0..D-1) goes to node (-(D*i + k + 1)) mod P; the
// links into a node are numbered by increasing i*D + k. db_mode selects binary
// (8-bit LLR, delta criterion) or double-binary (bit-level PFP payload,
// symbol-level criterion); k_thr is the ABR threshold K (0 = no ABR); half is
// the half-iteration parity that swaps the a-priori memory banks; apr_clear
// zeroes the a-priori memories at the start of a frame. net_idle is high when
// no packet is anywhere in the network: a half iteration is complete when
// every SISO has emitted its last value and net_idle is high.
//
// Defaults are the paper's largest configuration, P = 64 and D = 4 (M = 5
// RE ports), with the FIFO-length routing policy. The FIFO depth is this
// design's choice.
module noc_turbo_decoder
  import turbo_noc_pkg::*;
#(
  parameter int unsigned P          = 64,
  parameter int unsigned D          = 4,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter ra_policy_e  RA         = RA_FL,
  parameter int unsigned MEM_DEPTH  = 96,
  parameter int unsigned INTR_W     = 36
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              db_mode,
  input  logic [K_W-1:0]    k_thr,
  input  logic              half,
  input  logic              apr_clear,
  // SISO extrinsic outputs, one per node
  input  logic [P-1:0]      ext_valid,
  output logic [P-1:0]      ext_ready,
  input  sl_llr_t           ext        [P],
  input  sl_llr_t           ext_apr    [P],
  input  logic [DEST_W-1:0] ext_dest   [P],
  input  logic [LOC_W-1:0]  ext_loc    [P],
  // SISO a-priori read ports
  input  logic [LOC_W-1:0]  apr_raddr  [P],
  output sl_llr_t           apr_rdata  [P],
  // intrinsic memories
  input  logic [P-1:0]      intr_we,
  input  logic [LOC_W-1:0]  intr_waddr [P],
  input  logic [INTR_W-1:0] intr_wdata [P],
  input  logic [LOC_W-1:0]  intr_raddr [P],
  output logic [INTR_W-1:0] intr_rdata [P],
  // status
  output logic [P-1:0]      abr_skip,
  output logic [P-1:0]      rx_valid,
  output logic              net_idle
);

  logic [D-1:0] lo_valid [P];
  flit_t        lo_flit  [P][D];
  logic [D-1:0] lo_full  [P];
  logic [D-1:0] li_valid [P];
  flit_t        li_flit  [P][D];
  logic [D-1:0] li_full  [P];
  logic [P-1:0] busy;

  // Kautz wiring: input q of node j is fed by link SRC of node SRC / D.
  for (genvar j = 0; j < P; j++) begin : g_wire
    for (genvar q = 0; q < D; q++) begin : g_port
      localparam int SRC = kautz_pred(P, D, j, q);
      assign li_valid[j][q]            = lo_valid[SRC / D][SRC % D];
      assign li_flit[j][q]             = lo_flit[SRC / D][SRC % D];
      assign lo_full[SRC / D][SRC % D] = li_full[j][q];
    end
  end

  for (genvar i = 0; i < P; i++) begin : g_node
    noc_node #(
      .P(P), .D(D), .NODE(i), .FIFO_DEPTH(FIFO_DEPTH), .RA(RA),
      .MEM_DEPTH(MEM_DEPTH), .INTR_W(INTR_W)
    ) u_node (
      .clk            (clk),
      .rst            (rst),
      .db_mode        (db_mode),
      .k_thr          (k_thr),
      .half           (half),
      .apr_clear      (apr_clear),
      .link_in_valid  (li_valid[i]),
      .link_in_flit   (li_flit[i]),
      .link_in_full   (li_full[i]),
      .link_out_valid (lo_valid[i]),
      .link_out_flit  (lo_flit[i]),
      .link_out_full  (lo_full[i]),
      .ext_valid      (ext_valid[i]),
      .ext_ready      (ext_ready[i]),
      .ext            (ext[i]),
      .ext_apr        (ext_apr[i]),
      .ext_dest       (ext_dest[i]),
      .ext_loc        (ext_loc[i]),
      .apr_raddr      (apr_raddr[i]),
      .apr_rdata      (apr_rdata[i]),
      .intr_we        (intr_we[i]),
      .intr_waddr     (intr_waddr[i]),
      .intr_wdata     (intr_wdata[i]),
      .intr_raddr     (intr_raddr[i]),
      .intr_rdata     (intr_rdata[i]),
      .abr_skip       (abr_skip[i]),
      .rx_valid       (rx_valid[i]),
      .busy           (busy[i])
    );
  end

  assign net_idle = (busy == '0);

endmodule
