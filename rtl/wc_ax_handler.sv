// wc_ax_handler - Ax handler for one address channel (AR or AW) of the M-WC.
//
// One instance sits on the read address channel and one on the write address
// channel. It takes an address request from the initiator port, holds it,
// presents its attributes (address, burst length/size/type, WID from the
// user field, read or write) to the shared checker through the round-robin
// arbiter, and then forwards the unchanged request towards the AXI demux
// together with a route select: the target if the checker allowed it,
// otherwise the error handler with a bus-error or poisoned-data answer.
//
// Timing: the request is registered on its handshake (cycle 0), checked in
// the cycle the arbiter grants it (cycle 1 when uncontended), and offered to
// the demux from cycle 2. This gives the two-cycle overhead per transaction
// that the paper measures for the Worlds Checker. One request is in flight
// per handler; a new one is accepted once the previous one has left. The
// three-state controller and the one-in-flight policy are this design's own.
// Its assertions are disabled during reset, so lint sees rst_ni used both as
// an asynchronous reset and synchronously (SYNCASYNCNET); the synchronous use
// is in the assertions only, not in the circuit.
module wc_ax_handler
  import wc_pkg::*;
#(
  parameter bit IS_WRITE = 1'b0
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // from the initiator port
  input  ax_chan_t ax_i,
  input  logic     ax_valid_i,
  output logic     ax_ready_o,
  // to the arbiter / checker
  output logic     chk_req_o,
  output ax_chan_t chk_ax_o,
  output logic     chk_write_o,
  input  logic     chk_gnt_i,
  input  logic     chk_allow_i,
  input  logic     chk_buserr_i,
  // to the demux
  output ax_chan_t ax_o,
  output route_e   sel_o,
  output logic     ax_valid_o,
  input  logic     ax_ready_i
);

  typedef enum logic [1:0] {S_IDLE, S_CHECK, S_FWD} state_e;
  state_e   state_q;
  ax_chan_t ax_q;
  route_e   sel_q;

  assign ax_ready_o  = (state_q == S_IDLE);
  assign chk_req_o   = (state_q == S_CHECK);
  assign chk_ax_o    = ax_q;
  assign chk_write_o = IS_WRITE;
  assign ax_o        = ax_q;
  assign sel_o       = sel_q;
  assign ax_valid_o  = (state_q == S_FWD);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      ax_q    <= '0;
      sel_q   <= ROUTE_TARGET;
    end else begin
      unique case (state_q)
        S_IDLE: if (ax_valid_i) begin
          ax_q    <= ax_i;
          state_q <= S_CHECK;
        end
        S_CHECK: if (chk_gnt_i) begin
          sel_q   <= chk_allow_i  ? ROUTE_TARGET :
                     chk_buserr_i ? ROUTE_ERR_BUS : ROUTE_ERR_POISON;
          state_q <= S_FWD;
        end
        S_FWD: if (ax_ready_i) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // AXI: a forwarded request stays stable until it is accepted
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   ax_valid_o && !ax_ready_i |=> ax_valid_o && $stable(ax_o) && $stable(sel_o));

endmodule
