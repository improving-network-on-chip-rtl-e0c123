// One Fully-Adaptive (FA) node of the NoC-based turbo decoder: everything
// of a node except the SISO processor.
//
// Transmit side (network interface): the SISO offers an extrinsic value
// with its a-priori value, its destination node d(i,j) and its location
// t(i,j) in the destination's a-priori memory. The ABR unit decides whether
// the value is still worth sending. If so a packet {d, t, payload} is pushed
// into the RE's local input port. The payload is the 8-bit LLR for binary
// codes, or for double-binary codes the symbol LLRs converted to bit level
// and compressed to PFP form (11 bits). ext_ready is low while the local
// input FIFO is full: the SISO stalls.
//
// Receive side: packets delivered on the RE's local output are decoded
// (PFP expanded for double-binary codes) and written at location t into
// the a-priori memory bank of the next half iteration. The SISO reads the
// current bank through apr_raddr/apr_rdata (one cycle latency); for
// double-binary codes the stored bit-level pair is converted back to the
// three symbol LLRs on the way out.
//
// Locations are LOC_W (10) bits wide everywhere, enough for 1024 steps per
// slice. The memories only decode the low clog2(MEM_DEPTH) bits, so at the
// default depth of 96 the top address bits of the SISO ports go unused;
// raise MEM_DEPTH when P is lowered.
//
// The node structure follows the paper's FA node (RE plus PE with SISO and
// memories, d and t travelling with the data). The handshakes, the memory
// banks and where the BL->SL conversion sits are this design's choices.
module noc_node
  import turbo_noc_pkg::*;
#(
  parameter int unsigned P          = 64,
  parameter int unsigned D          = 4,
  parameter int unsigned NODE       = 0,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter ra_policy_e  RA         = RA_FL,
  parameter int unsigned MEM_DEPTH  = 96,
  parameter int unsigned INTR_W     = 36
) (
  input  logic              clk,
  input  logic              rst,
  // configuration
  input  logic              db_mode,
  input  logic [K_W-1:0]    k_thr,
  input  logic              half,
  input  logic              apr_clear,
  // network links of this node
  input  logic [D-1:0]      link_in_valid,
  input  flit_t             link_in_flit  [D],
  output logic [D-1:0]      link_in_full,
  output logic [D-1:0]      link_out_valid,
  output flit_t             link_out_flit [D],
  input  logic [D-1:0]      link_out_full,
  // extrinsic output of the SISO
  input  logic              ext_valid,
  output logic              ext_ready,
  input  sl_llr_t           ext,
  input  sl_llr_t           ext_apr,
  input  logic [DEST_W-1:0] ext_dest,
  input  logic [LOC_W-1:0]  ext_loc,
  // a-priori read port of the SISO
  input  logic [LOC_W-1:0]  apr_raddr,
  output sl_llr_t           apr_rdata,
  // intrinsic memory
  input  logic              intr_we,
  input  logic [LOC_W-1:0]  intr_waddr,
  input  logic [INTR_W-1:0] intr_wdata,
  input  logic [LOC_W-1:0]  intr_raddr,
  output logic [INTR_W-1:0] intr_rdata,
  // status
  output logic              abr_skip,
  output logic              rx_valid,
  output logic              busy
);

  localparam int unsigned M  = D + 1;
  localparam int unsigned AW = $clog2(MEM_DEPTH);

  // ---------------- transmit side ----------------
  logic    skip;
  bl_llr_t tx_bl;
  pfp_t    tx_pfp;
  flit_t   tx_flit;

  abr_unit u_abr (
    .db_mode (db_mode),
    .k_thr   (k_thr),
    .ext     (ext),
    .apr     (ext_apr),
    .skip    (skip)
  );

  sl2bl u_sl2bl (.sl(ext), .bl(tx_bl));
  pfp_enc u_pfp_enc (.bl(tx_bl), .pfp(tx_pfp));

  always_comb begin
    tx_flit.dest    = ext_dest;
    tx_flit.loc     = ext_loc;
    tx_flit.payload = db_mode ? PAYLOAD_W'(tx_pfp) : PAYLOAD_W'(unsigned'(ext.l01));
  end

  // ---------------- routing element ----------------
  logic [M-1:0] re_in_valid, re_in_full, re_out_valid, re_out_full;
  flit_t        re_in_flit  [M];
  flit_t        re_out_flit [M];

  for (genvar k = 0; k < D; k++) begin : g_link
    assign re_in_valid[k]    = link_in_valid[k];
    assign re_in_flit[k]     = link_in_flit[k];
    assign link_in_full[k]   = re_in_full[k];
    assign link_out_valid[k] = re_out_valid[k];
    assign link_out_flit[k]  = re_out_flit[k];
    assign re_out_full[k]    = link_out_full[k];
  end

  assign ext_ready      = !re_in_full[D];
  assign re_in_valid[D] = ext_valid && !skip;
  assign re_in_flit[D]  = tx_flit;
  assign re_out_full[D] = 1'b0;             // the memory takes one flit per cycle
  assign abr_skip       = ext_valid && ext_ready && skip;

  routing_element #(
    .P(P), .D(D), .NODE(NODE), .FIFO_DEPTH(FIFO_DEPTH), .RA(RA)
  ) u_re (
    .clk       (clk),
    .rst       (rst),
    .in_valid  (re_in_valid),
    .in_flit   (re_in_flit),
    .in_full   (re_in_full),
    .out_valid (re_out_valid),
    .out_flit  (re_out_flit),
    .out_full  (re_out_full),
    .busy      (busy)
  );

  // ---------------- receive side ----------------
  flit_t   rx_flit;
  bl_llr_t rx_bl;
  bl_llr_t rx_word;
  bl_llr_t mem_word;

  assign rx_flit  = re_out_flit[D];
  assign rx_valid = re_out_valid[D];

  pfp_dec u_pfp_dec (.pfp(pfp_t'(rx_flit.payload)), .bl(rx_bl));

  always_comb begin
    if (db_mode) rx_word = rx_bl;
    else begin
      rx_word.a = rx_flit.payload[LAMBDA_W-1:0];
      rx_word.b = '0;
    end
  end

  apriori_mem #(.DEPTH(MEM_DEPTH), .WIDTH(BL_W)) u_apr_mem (
    .clk   (clk),
    .rst   (rst),
    .clear (apr_clear),
    .half  (half),
    .we    (rx_valid),
    .waddr (rx_flit.loc[AW-1:0]),
    .wdata (rx_word),
    .raddr (apr_raddr[AW-1:0]),
    .rdata (mem_word)
  );

  sl_llr_t rd_sl;
  bl2sl u_bl2sl (.bl(mem_word), .sl(rd_sl));

  always_comb begin
    if (db_mode) apr_rdata = rd_sl;
    else begin
      apr_rdata.l01 = mem_word.a;
      apr_rdata.l10 = '0;
      apr_rdata.l11 = '0;
    end
  end

  intrinsic_mem #(.DEPTH(MEM_DEPTH), .WIDTH(INTR_W)) u_intr_mem (
    .clk   (clk),
    .we    (intr_we),
    .waddr (intr_waddr[AW-1:0]),
    .wdata (intr_wdata),
    .raddr (intr_raddr[AW-1:0]),
    .rdata (intr_rdata)
  );

  // Every delivered packet belongs to this node.
  a_delivered_here: assert property (@(posedge clk) disable iff (rst)
                                     rx_valid |-> int'(rx_flit.dest) == int'(NODE));

endmodule
