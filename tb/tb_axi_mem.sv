// tb_axi_mem - behavioural AXI4 subordinate (memory) for the testbenches.
//
// Word-addressed sparse memory (DATA_W-bit words, full strobes assumed).
// A word never written reads as {TAG, address}, so a test can tell which
// memory answered. Requests are queued, several may be outstanding, and
// responses come back in order. All outputs are registered. W beats are
// accepted independently of AW and paired with AWs in order. Ready and
// valid signals are throttled at random when STALL is set. Counts accepted
// AR/AW requests and W beats, and records the cycle of the last AR, AW and
// W handshake for latency checks.
module tb_axi_mem
  import wc_pkg::*;
#(
  parameter logic [7:0] TAG   = 8'hA0,
  parameter bit         STALL = 1'b0
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t req_i,
  output axi_rsp_t rsp_o
);
  logic [DATA_W-1:0] mem [addr_t];
  ax_chan_t ar_q[$], aw_q[$];
  w_chan_t  w_q[$];
  id_t      b_q[$];
  int       r_beat = 0;
  int       w_beat = 0;
  int unsigned n_ar = 0, n_aw = 0, n_w = 0;
  longint unsigned cyc = 0, last_ar_cyc = 0, last_aw_cyc = 0, last_w_cyc = 0;

  function automatic logic [DATA_W-1:0] rd_word(input addr_t a);
    addr_t wa;
    wa = a & ~(addr_t'(STRB_W) - addr_t'(1));
    if (mem.exists(wa)) return mem[wa];
    return {TAG, wa[DATA_W-9:0]};
  endfunction

  function automatic addr_t beat_addr(input ax_chan_t ax, input int beat);
    if (ax.burst == BURST_FIXED) return ax.addr;
    return ax.addr + (addr_t'(beat) << ax.size);
  endfunction

  function automatic logic go();
    return !STALL || ($urandom_range(0, 2) != 0);
  endfunction

  initial rsp_o = '0;

  always @(posedge clk_i) begin
    axi_rsp_t nxt;
    cyc <= cyc + 1;
    if (!rst_ni) begin
      ar_q.delete(); aw_q.delete(); w_q.delete(); b_q.delete();
      r_beat = 0; w_beat = 0;
      rsp_o <= '0;
    end else begin
      if (req_i.ar_valid && rsp_o.ar_ready) begin
        ar_q.push_back(req_i.ar); n_ar++; last_ar_cyc = cyc;
      end
      if (req_i.aw_valid && rsp_o.aw_ready) begin
        aw_q.push_back(req_i.aw); n_aw++; last_aw_cyc = cyc;
      end
      if (req_i.w_valid && rsp_o.w_ready) begin
        w_q.push_back(req_i.w); n_w++; last_w_cyc = cyc;
      end
      if (rsp_o.r_valid && req_i.r_ready) begin
        if (rsp_o.r.last) begin void'(ar_q.pop_front()); r_beat = 0; end
        else r_beat++;
      end
      if (rsp_o.b_valid && req_i.b_ready) void'(b_q.pop_front());
      // pair W beats with their AW
      while (aw_q.size() != 0 && w_q.size() != 0) begin
        w_chan_t wb;
        wb = w_q.pop_front();
        mem[beat_addr(aw_q[0], w_beat) & ~(addr_t'(STRB_W) - addr_t'(1))] = wb.data;
        if (wb.last) begin
          b_q.push_back(aw_q[0].id); void'(aw_q.pop_front()); w_beat = 0;
        end else w_beat++;
      end
      // next outputs
      nxt = '0;
      nxt.ar_ready = go() && ar_q.size() < 4;
      nxt.aw_ready = go() && aw_q.size() < 4;
      nxt.w_ready  = go() && w_q.size() < 16;
      if (ar_q.size() != 0 && go()) begin
        nxt.r_valid  = 1'b1;
        nxt.r.id     = ar_q[0].id;
        nxt.r.data   = rd_word(beat_addr(ar_q[0], r_beat));
        nxt.r.resp   = RESP_OKAY;
        nxt.r.last   = (r_beat == int'(ar_q[0].len));
      end
      if (b_q.size() != 0 && go()) begin
        nxt.b_valid = 1'b1;
        nxt.b.id    = b_q[0];
      end
      rsp_o <= nxt;
    end
  end
endmodule
