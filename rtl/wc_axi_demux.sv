// wc_axi_demux - 1-to-2 AXI demultiplexer behind the Ax handlers.
//
// Each checked AR/AW request arrives with a route select from its Ax handler:
// the target port (index 0) or the error handler (index 1, with the answer
// kind passed along as a poison flag). W beats follow the route of their AW;
// R and B responses come back from the port their request went to.
//
// Ordering rule: transactions in one direction may only be outstanding at one
// port at a time. A request for the other port waits until every outstanding
// transaction of that direction has completed (its B, or its last R beat).
// This keeps responses in request order without per-ID tracking. Up to
// MAX_TRANS transactions may be outstanding per direction.
// W beats are released only once their AW is being handed to its port (at
// the earliest in the same cycle), so no write data reaches the target before
// the checker has allowed the write.
//
// The paper uses an existing open-source AXI demultiplexer here and gives
// only its role; this module is a minimal replacement with the same role,
// and the ordering rule above is its own. Combinational valid/ready paths,
// no added latency.
// Its assertions are disabled during reset, so lint sees rst_ni used both as
// an asynchronous reset and synchronously (SYNCASYNCNET); the synchronous use
// is in the assertions only, not in the circuit.
module wc_axi_demux
  import wc_pkg::*;
#(
  parameter int unsigned MAX_TRANS = 8
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // checked address requests from the Ax handlers
  input  ax_chan_t aw_i,
  input  route_e   aw_sel_i,
  input  logic     aw_valid_i,
  output logic     aw_ready_o,
  input  ax_chan_t ar_i,
  input  route_e   ar_sel_i,
  input  logic     ar_valid_i,
  output logic     ar_ready_o,
  // W / B / R channels of the initiator port
  input  w_chan_t  w_i,
  input  logic     w_valid_i,
  output logic     w_ready_o,
  output b_chan_t  b_o,
  output logic     b_valid_o,
  input  logic     b_ready_i,
  output r_chan_t  r_o,
  output logic     r_valid_o,
  input  logic     r_ready_i,
  // port 0: target
  output axi_req_t tgt_req_o,
  input  axi_rsp_t tgt_rsp_i,
  // port 1: error handler
  output axi_req_t err_req_o,
  input  axi_rsp_t err_rsp_i,
  output logic     err_aw_poison_o,
  output logic     err_ar_poison_o
);

  localparam int unsigned CW = $clog2(MAX_TRANS + 1);

  logic [CW-1:0] aw_cnt_q, ar_cnt_q, w_cnt_q;  // outstanding B, R bursts, W bursts
  logic          aw_dst_q, ar_dst_q;           // 1 = error handler
  logic          aw_dst, ar_dst;
  logic          aw_ok, ar_ok;
  logic          w_open, w_dst;
  logic          aw_hs, ar_hs, w_hs, wlast_hs, b_hs, rlast_hs;

  assign aw_dst = (aw_sel_i != ROUTE_TARGET);
  assign ar_dst = (ar_sel_i != ROUTE_TARGET);
  assign aw_ok  = ((aw_cnt_q == '0) || (aw_dst == aw_dst_q)) && (aw_cnt_q < CW'(MAX_TRANS));
  assign ar_ok  = ((ar_cnt_q == '0) || (ar_dst == ar_dst_q)) && (ar_cnt_q < CW'(MAX_TRANS));

  always_comb begin
    tgt_req_o = '0;
    err_req_o = '0;
    // address channels
    tgt_req_o.aw       = aw_i;
    err_req_o.aw       = aw_i;
    tgt_req_o.aw_valid = aw_valid_i && aw_ok && !aw_dst;
    err_req_o.aw_valid = aw_valid_i && aw_ok &&  aw_dst;
    aw_ready_o         = aw_ok && (aw_dst ? err_rsp_i.aw_ready : tgt_rsp_i.aw_ready);
    tgt_req_o.ar       = ar_i;
    err_req_o.ar       = ar_i;
    tgt_req_o.ar_valid = ar_valid_i && ar_ok && !ar_dst;
    err_req_o.ar_valid = ar_valid_i && ar_ok &&  ar_dst;
    ar_ready_o         = ar_ok && (ar_dst ? err_rsp_i.ar_ready : tgt_rsp_i.ar_ready);
    err_aw_poison_o    = (aw_sel_i == ROUTE_ERR_POISON);
    err_ar_poison_o    = (ar_sel_i == ROUTE_ERR_POISON);
    // write data follows the route of the oldest unfinished AW, or of the
    // AW being handed over in this very cycle
    w_open             = (w_cnt_q != '0) || (aw_valid_i && aw_ready_o);
    w_dst              = (w_cnt_q != '0) ? aw_dst_q : aw_dst;
    tgt_req_o.w        = w_i;
    err_req_o.w        = w_i;
    tgt_req_o.w_valid  = w_valid_i && w_open && !w_dst;
    err_req_o.w_valid  = w_valid_i && w_open &&  w_dst;
    w_ready_o          = w_open && (w_dst ? err_rsp_i.w_ready : tgt_rsp_i.w_ready);
    // responses come from the port the outstanding requests went to
    b_o                = aw_dst_q ? err_rsp_i.b : tgt_rsp_i.b;
    b_valid_o          = (aw_cnt_q != '0) && (aw_dst_q ? err_rsp_i.b_valid : tgt_rsp_i.b_valid);
    tgt_req_o.b_ready  = b_ready_i && (aw_cnt_q != '0) && !aw_dst_q;
    err_req_o.b_ready  = b_ready_i && (aw_cnt_q != '0) &&  aw_dst_q;
    r_o                = ar_dst_q ? err_rsp_i.r : tgt_rsp_i.r;
    r_valid_o          = (ar_cnt_q != '0) && (ar_dst_q ? err_rsp_i.r_valid : tgt_rsp_i.r_valid);
    tgt_req_o.r_ready  = r_ready_i && (ar_cnt_q != '0) && !ar_dst_q;
    err_req_o.r_ready  = r_ready_i && (ar_cnt_q != '0) &&  ar_dst_q;
  end

  assign aw_hs    = aw_valid_i && aw_ready_o;
  assign ar_hs    = ar_valid_i && ar_ready_o;
  assign w_hs     = w_valid_i && w_ready_o;
  assign wlast_hs = w_hs && w_i.last;
  assign b_hs     = b_valid_o && b_ready_i;
  assign rlast_hs = r_valid_o && r_ready_i && r_o.last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      aw_cnt_q <= '0;
      ar_cnt_q <= '0;
      w_cnt_q  <= '0;
      aw_dst_q <= 1'b0;
      ar_dst_q <= 1'b0;
    end else begin
      if (aw_hs) aw_dst_q <= aw_dst;
      if (ar_hs) ar_dst_q <= ar_dst;
      aw_cnt_q <= aw_cnt_q + CW'(aw_hs) - CW'(b_hs);
      ar_cnt_q <= ar_cnt_q + CW'(ar_hs) - CW'(rlast_hs);
      w_cnt_q  <= w_cnt_q  + CW'(aw_hs) - CW'(wlast_hs);
    end
  end

  // no response without an outstanding request
  assert property (@(posedge clk_i) disable iff (!rst_ni) b_hs |-> aw_cnt_q != '0);
  assert property (@(posedge clk_i) disable iff (!rst_ni) rlast_hs |-> ar_cnt_q != '0);

endmodule
