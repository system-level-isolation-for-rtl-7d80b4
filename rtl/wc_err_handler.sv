// wc_err_handler - AXI subordinate that terminates denied transactions.
//
// Requests the checker denies are routed here instead of to the target. Each
// arrives with a poison flag chosen by the matching rule's error-control bits:
//   poison=0: answer with an AXI DECERR (reads: len+1 beats of DECERR),
//   poison=1: answer OKAY but discard the write data, or return invalid read
//             data (all zeros) for every beat.
// Write bursts always have their W beats consumed up to wlast before the B
// response is sent, so the initiator's write channel never blocks.
// The two answer kinds are the paper's; the zero read data and the
// one-transaction-at-a-time state machines (one for reads, one for writes,
// independent of each other) are this design's choices. The AR/AW ready is
// high whenever that direction is idle; responses start the cycle after.
module wc_err_handler
  import wc_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t req_i,
  input  logic     aw_poison_i,
  input  logic     ar_poison_i,
  output axi_rsp_t rsp_o
);

  // ------------------------------------------------------------------ reads
  logic       rd_busy_q, rd_poison_q;
  id_t        rd_id_q;
  logic [7:0] rd_left_q;   // beats still to send, minus one

  // ----------------------------------------------------------------- writes
  typedef enum logic [1:0] {W_IDLE, W_DATA, W_RESP} wstate_e;
  wstate_e    w_state_q;
  logic       wr_poison_q;
  id_t        wr_id_q;

  always_comb begin
    rsp_o          = '0;
    rsp_o.ar_ready = !rd_busy_q;
    rsp_o.r_valid  = rd_busy_q;
    rsp_o.r.id     = rd_id_q;
    rsp_o.r.data   = '0;
    rsp_o.r.resp   = rd_poison_q ? RESP_OKAY : RESP_DECERR;
    rsp_o.r.last   = (rd_left_q == 8'd0);
    rsp_o.aw_ready = (w_state_q == W_IDLE);
    rsp_o.w_ready  = (w_state_q == W_DATA);
    rsp_o.b_valid  = (w_state_q == W_RESP);
    rsp_o.b.id     = wr_id_q;
    rsp_o.b.resp   = wr_poison_q ? RESP_OKAY : RESP_DECERR;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_busy_q   <= 1'b0;
      rd_poison_q <= 1'b0;
      rd_id_q     <= '0;
      rd_left_q   <= '0;
      w_state_q   <= W_IDLE;
      wr_poison_q <= 1'b0;
      wr_id_q     <= '0;
    end else begin
      if (!rd_busy_q) begin
        if (req_i.ar_valid) begin
          rd_busy_q   <= 1'b1;
          rd_poison_q <= ar_poison_i;
          rd_id_q     <= req_i.ar.id;
          rd_left_q   <= req_i.ar.len;
        end
      end else if (req_i.r_ready) begin
        if (rd_left_q == 8'd0) rd_busy_q <= 1'b0;
        else                   rd_left_q <= rd_left_q - 8'd1;
      end

      unique case (w_state_q)
        W_IDLE: if (req_i.aw_valid) begin
          wr_poison_q <= aw_poison_i;
          wr_id_q     <= req_i.aw.id;
          w_state_q   <= W_DATA;
        end
        W_DATA: if (req_i.w_valid && req_i.w.last) w_state_q <= W_RESP;
        W_RESP: if (req_i.b_ready) w_state_q <= W_IDLE;
        default: w_state_q <= W_IDLE;
      endcase
    end
  end

endmodule
