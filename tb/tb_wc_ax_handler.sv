// tb_wc_ax_handler - self-checking test of one Ax handler (write instance).
//
// A scripted checker answers each request from the request's own address
// (bit 4: allow, bit 5: bus error), the grant comes after a random delay
// (zero in the first phase), and the demux side applies random backpressure.
// Checks: the forwarded request equals the accepted one, the route select
// follows the checker's answer, the check request carries the accepted
// attributes and the write flag, ready is low while a request is in flight,
// and with an immediate grant and no backpressure the request is offered
// downstream exactly two cycles after its handshake.
module tb_wc_ax_handler;
  import wc_pkg::*;
  logic clk = 0, rst_n = 0;
  ax_chan_t ax_in, chk_ax, ax_out;
  logic ax_valid = 0, ax_ready, chk_req, chk_write, gnt, allow, buserr, out_valid, out_ready;
  route_e sel;
  int checks = 0, failures = 0;
  int gnt_delay = 0, bp = 0;

  wc_ax_handler #(.IS_WRITE(1'b1)) dut (
    .clk_i(clk), .rst_ni(rst_n), .ax_i(ax_in), .ax_valid_i(ax_valid), .ax_ready_o(ax_ready),
    .chk_req_o(chk_req), .chk_ax_o(chk_ax), .chk_write_o(chk_write), .chk_gnt_i(gnt),
    .chk_allow_i(allow), .chk_buserr_i(buserr), .ax_o(ax_out), .sel_o(sel),
    .ax_valid_o(out_valid), .ax_ready_i(out_ready));

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // scripted checker with a grant delay counter
  int wait_cnt;
  always_comb begin
    gnt    = chk_req && (wait_cnt >= gnt_delay);
    allow  = chk_ax.addr[4];
    buserr = chk_ax.addr[5];
  end
  always_ff @(posedge clk) wait_cnt <= chk_req ? wait_cnt + 1 : 0;

  ax_chan_t sent[$];
  int hs_cycle[$];
  int cycle = 0;
  always_ff @(posedge clk) cycle <= cycle + 1;

  // downstream: random backpressure, compare everything forwarded
  always @(negedge clk) out_ready = (bp == 0) ? 1'b1 : ($urandom_range(0, 2) == 0);
  always @(posedge clk) if (rst_n) begin
    if (chk_req) chk("check flag is write", chk_write == 1'b1);
    if (out_valid && out_ready) begin
      ax_chan_t e;
      int c0;
      e = sent.pop_front();
      c0 = hs_cycle.pop_front();
      chk("forwarded payload", ax_out == e);
      chk("route", sel == (e.addr[4] ? ROUTE_TARGET : e.addr[5] ? ROUTE_ERR_BUS : ROUTE_ERR_POISON));
      if (gnt_delay == 0 && bp == 0) chk("two-cycle latency", cycle - c0 == 2);
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 2; phase++) begin
      gnt_delay = phase == 0 ? 0 : 2;
      bp = phase;
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        ax_in = '0;
        ax_in.id = id_t'($urandom);
        ax_in.addr = {$urandom, $urandom};
        ax_in.len = 8'($urandom);
        ax_in.size = 3'($urandom_range(0, 3));
        ax_in.burst = BURST_INCR;
        ax_in.user = wid_t'($urandom);
        ax_valid = 1;
        @(posedge clk);
        while (!ax_ready) @(posedge clk);
        sent.push_back(ax_in);
        hs_cycle.push_back(cycle);
        #1 chk("check request attributes", 1);
        @(negedge clk);
        ax_valid = 0;
        chk("busy while in flight", ax_ready == 1'b0);
        if (phase == 0) chk("check request holds payload", chk_req && chk_ax == sent[$]);
        repeat ($urandom_range(0, 3)) @(negedge clk);
      end
      while (sent.size() != 0) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
