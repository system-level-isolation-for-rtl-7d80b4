// wc_top - modified Worlds Checker (M-WC): a target-side AXI access checker.
//
// Sits between an AXI initiator port and a protected target. Every request
// carries the World ID (WID) of the issuing world in its AR/AW user field.
// Structure (after the paper's block diagram):
//   * two Ax handlers (read, write) capture AR/AW requests and pass their
//     attributes, through a round-robin arbiter, to one shared checker;
//   * the checker evaluates all NUM_SLOTS slots in parallel, combinationally,
//     each with NUM_PERMS explicit (WID, r, w) entries and a general-read bit;
//   * the Ax handlers forward allowed requests to the target and denied ones
//     to the error handler, through the AXI demux; W beats follow their AW,
//     R/B responses return from where their request went;
//   * the register map, on a separate configuration port, holds the slots,
//     decodes them into start/end bounds when written, and records the first
//     violation (WID, read/write, address).
// Timing: an uncontended request leaves the target port two cycles after its
// handshake on the initiator port (the paper's measured overhead for both
// Worlds Checker variants). The R/B/W paths add no delay.
// Defaults follow the paper where it gives a number: 16 slots (the smallest
// configuration of the paper's SoC), 4 perm entries per slot (its slot table
// example), 7-bit WIDs (128 worlds), 64-bit addresses. The AXI data/ID widths
// and the configuration bus are this design's choices.
// Of the request being checked, only address, length, size, burst type and
// the WID in the user field reach the checker; its ID, cache, protection and
// other attributes play no part in the decision (lint lists them as unused).
// Lint also reports rst_ni used synchronously: that comes from the
// assertions inside the submodules, which are disabled during reset.
module wc_top
  import wc_pkg::*;
#(
  parameter int unsigned NUM_SLOTS = 16,
  parameter int unsigned NUM_PERMS = 4,
  parameter int unsigned MAX_TRANS = 8,
  parameter int unsigned CFG_AW    = 16
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // initiator AXI port
  input  axi_req_t          slv_req_i,
  output axi_rsp_t          slv_rsp_o,
  // target AXI port
  output axi_req_t          mst_req_o,
  input  axi_rsp_t          mst_rsp_i,
  // configuration port
  input  logic              cfg_req_i,
  input  logic              cfg_we_i,
  input  logic [CFG_AW-1:0] cfg_addr_i,
  input  logic [31:0]       cfg_wdata_i,
  output logic [31:0]       cfg_rdata_o,
  output logic              cfg_err_o
);

  // ------------------------------------------------------------ Ax handlers
  ax_chan_t       h_chk_ax   [2];
  logic     [1:0] h_chk_req, h_gnt;
  logic     [1:0] h_chk_wr;
  ax_chan_t       h_ax       [2];
  route_e         h_sel      [2];
  logic     [1:0] h_valid, h_ready;
  logic           allow, buserr;
  logic           arb_idx;

  // index 0 = read (AR), 1 = write (AW)
  wc_ax_handler #(.IS_WRITE(1'b0)) u_ar_handler (
    .clk_i, .rst_ni,
    .ax_i        (slv_req_i.ar),
    .ax_valid_i  (slv_req_i.ar_valid),
    .ax_ready_o  (slv_rsp_o.ar_ready),
    .chk_req_o   (h_chk_req[0]),
    .chk_ax_o    (h_chk_ax[0]),
    .chk_write_o (h_chk_wr[0]),
    .chk_gnt_i   (h_gnt[0]),
    .chk_allow_i (allow),
    .chk_buserr_i(buserr),
    .ax_o        (h_ax[0]),
    .sel_o       (h_sel[0]),
    .ax_valid_o  (h_valid[0]),
    .ax_ready_i  (h_ready[0])
  );

  wc_ax_handler #(.IS_WRITE(1'b1)) u_aw_handler (
    .clk_i, .rst_ni,
    .ax_i        (slv_req_i.aw),
    .ax_valid_i  (slv_req_i.aw_valid),
    .ax_ready_o  (slv_rsp_o.aw_ready),
    .chk_req_o   (h_chk_req[1]),
    .chk_ax_o    (h_chk_ax[1]),
    .chk_write_o (h_chk_wr[1]),
    .chk_gnt_i   (h_gnt[1]),
    .chk_allow_i (allow),
    .chk_buserr_i(buserr),
    .ax_o        (h_ax[1]),
    .sel_o       (h_sel[1]),
    .ax_valid_o  (h_valid[1]),
    .ax_ready_i  (h_ready[1])
  );

  // ----------------------------------------------------- arbiter and checker
  wc_rr_arbiter #(.N(2)) u_arbiter (
    .clk_i, .rst_ni,
    .req_i (h_chk_req),
    .gnt_o (h_gnt),
    .idx_o (arb_idx)
  );

  slot_dec_t [NUM_SLOTS-1:0]                 slots;
  perm_t     [NUM_SLOTS-1:0][NUM_PERMS-1:0]  perms;
  ax_chan_t                                  chk_ax;
  logic                                      chk_wr;

  assign chk_ax = h_chk_ax[arb_idx];
  assign chk_wr = h_chk_wr[arb_idx];

  wc_checker #(.NUM_SLOTS(NUM_SLOTS), .NUM_PERMS(NUM_PERMS)) u_checker (
    .addr_i   (chk_ax.addr),
    .len_i    (chk_ax.len),
    .size_i   (chk_ax.size),
    .burst_i  (chk_ax.burst),
    .wid_i    (chk_ax.user),
    .write_i  (chk_wr),
    .slot_i   (slots),
    .perm_i   (perms),
    .allow_o  (allow),
    .buserr_o (buserr)
  );

  // ------------------------------------------------------------ register map
  wc_regmap #(.NUM_SLOTS(NUM_SLOTS), .NUM_PERMS(NUM_PERMS), .CFG_AW(CFG_AW)) u_regmap (
    .clk_i, .rst_ni,
    .req_i        (cfg_req_i),
    .we_i         (cfg_we_i),
    .addr_i       (cfg_addr_i),
    .wdata_i      (cfg_wdata_i),
    .rdata_o      (cfg_rdata_o),
    .err_o        (cfg_err_o),
    .slot_o       (slots),
    .perm_o       (perms),
    .viol_i       ((|h_gnt) && !allow),
    .viol_wid_i   (chk_ax.user),
    .viol_write_i (chk_wr),
    .viol_addr_i  (chk_ax.addr)
  );

  // -------------------------------------------------- demux and error handler
  axi_req_t err_req;
  axi_rsp_t err_rsp;
  logic     err_aw_poison, err_ar_poison;

  wc_axi_demux #(.MAX_TRANS(MAX_TRANS)) u_demux (
    .clk_i, .rst_ni,
    .aw_i            (h_ax[1]),
    .aw_sel_i        (h_sel[1]),
    .aw_valid_i      (h_valid[1]),
    .aw_ready_o      (h_ready[1]),
    .ar_i            (h_ax[0]),
    .ar_sel_i        (h_sel[0]),
    .ar_valid_i      (h_valid[0]),
    .ar_ready_o      (h_ready[0]),
    .w_i             (slv_req_i.w),
    .w_valid_i       (slv_req_i.w_valid),
    .w_ready_o       (slv_rsp_o.w_ready),
    .b_o             (slv_rsp_o.b),
    .b_valid_o       (slv_rsp_o.b_valid),
    .b_ready_i       (slv_req_i.b_ready),
    .r_o             (slv_rsp_o.r),
    .r_valid_o       (slv_rsp_o.r_valid),
    .r_ready_i       (slv_req_i.r_ready),
    .tgt_req_o       (mst_req_o),
    .tgt_rsp_i       (mst_rsp_i),
    .err_req_o       (err_req),
    .err_rsp_i       (err_rsp),
    .err_aw_poison_o (err_aw_poison),
    .err_ar_poison_o (err_ar_poison)
  );

  wc_err_handler u_err_handler (
    .clk_i, .rst_ni,
    .req_i       (err_req),
    .aw_poison_i (err_aw_poison),
    .ar_poison_i (err_ar_poison),
    .rsp_o       (err_rsp)
  );

endmodule
