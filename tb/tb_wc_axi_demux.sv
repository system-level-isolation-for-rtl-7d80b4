// tb_wc_axi_demux - self-checking test of the 1-to-2 AXI demux.
//
// Two behavioural memories stand for the target (tag A0) and the error
// handler (tag E0). Random reads and writes with random route selects and
// burst lengths are issued, several outstanding at a time. Checks: read data
// comes from the memory the request was routed to, written words land only
// in the chosen memory, the poison flag follows the select, W beats are held
// back until their AW has been routed, and a request for the other port
// waits while requests to the first port are outstanding (counted; the test
// fails if this stall never happens).
module tb_wc_axi_demux;
  import wc_pkg::*;
  logic clk = 0, rst_n = 0;
  ax_chan_t aw, ar; route_e aw_sel, ar_sel;
  logic aw_valid = 0, aw_ready, ar_valid = 0, ar_ready;
  w_chan_t w; logic w_valid = 0, w_ready;
  b_chan_t b; logic b_valid, b_ready = 0;
  r_chan_t r; logic r_valid, r_ready = 0;
  axi_req_t tgt_req, err_req; axi_rsp_t tgt_rsp, err_rsp;
  logic awp, arp;
  int checks = 0, failures = 0, switch_stalls = 0;

  wc_axi_demux #(.MAX_TRANS(4)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .aw_i(aw), .aw_sel_i(aw_sel), .aw_valid_i(aw_valid), .aw_ready_o(aw_ready),
    .ar_i(ar), .ar_sel_i(ar_sel), .ar_valid_i(ar_valid), .ar_ready_o(ar_ready),
    .w_i(w), .w_valid_i(w_valid), .w_ready_o(w_ready),
    .b_o(b), .b_valid_o(b_valid), .b_ready_i(b_ready),
    .r_o(r), .r_valid_o(r_valid), .r_ready_i(r_ready),
    .tgt_req_o(tgt_req), .tgt_rsp_i(tgt_rsp), .err_req_o(err_req), .err_rsp_i(err_rsp),
    .err_aw_poison_o(awp), .err_ar_poison_o(arp));

  tb_axi_mem #(.TAG(8'hA0), .STALL(1'b1)) u_tgt (.clk_i(clk), .rst_ni(rst_n), .req_i(tgt_req), .rsp_o(tgt_rsp));
  tb_axi_mem #(.TAG(8'hE0), .STALL(1'b1)) u_err (.clk_i(clk), .rst_ni(rst_n), .req_i(err_req), .rsp_o(err_rsp));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- read side: issue, then collect in order
  typedef struct { addr_t a; int len; logic err; id_t id; } rd_t;
  rd_t rd_q[$];
  int  r_beat = 0;
  always @(posedge clk) if (rst_n && r_valid && r_ready) begin
    rd_t e;
    e = rd_q[0];
    chk("r id", r.id == e.id);
    chk("r source", r.data[DATA_W-1 -: 8] == (e.err ? 8'hE0 : 8'hA0));
    chk("r last", r.last == (r_beat == e.len));
    if (r.last) begin void'(rd_q.pop_front()); r_beat = 0; end else r_beat++;
  end
  always @(posedge clk) if (rst_n && ar_valid && !ar_ready && rd_q.size() != 0 &&
                            (ar_sel != ROUTE_TARGET) != rd_q[$].err) switch_stalls++;
  always @(negedge clk) begin
    r_ready = ($urandom_range(0, 3) != 0);
    b_ready = ($urandom_range(0, 3) != 0);
  end

  int n_b_exp = 0, n_b = 0;
  always @(posedge clk) if (rst_n && b_valid && b_ready) n_b++;

  task automatic do_read(input addr_t a, input int len, input route_e s);
    @(negedge clk);
    ar = '0; ar.addr = a; ar.len = 8'(len); ar.size = 3; ar.burst = BURST_INCR;
    ar.id = id_t'($urandom); ar_sel = s; ar_valid = 1;
    #1 chk("ar poison flag", arp == (s == ROUTE_ERR_POISON));
    @(posedge clk); while (!ar_ready) @(posedge clk);
    rd_q.push_back('{a, len, s != ROUTE_TARGET, ar.id});
    @(negedge clk); ar_valid = 0;
  endtask

  task automatic do_write(input addr_t a, input int len, input route_e s, input logic w_first);
    @(negedge clk);
    aw = '0; aw.addr = a; aw.len = 8'(len); aw.size = 3; aw.burst = BURST_INCR;
    aw.id = id_t'($urandom); aw_sel = s;
    w.data = {8'h5A, 56'(a)}; w.strb = '1; w.last = (len == 0);
    if (w_first) begin
      // W offered before the AW: must not pass
      w_valid = 1;
      #1 chk("w held before aw", !w_ready && !tgt_req.w_valid && !err_req.w_valid);
      @(negedge clk);
      w_valid = 0;
    end
    aw_valid = 1;
    @(posedge clk); while (!aw_ready) @(posedge clk);
    @(negedge clk); aw_valid = 0;
    for (int k = 0; k <= len; k++) begin
      w_valid = 1; w.data = {8'h5A, 56'(a + addr_t'(8 * k))}; w.last = (k == len);
      @(posedge clk); while (!w_ready) @(posedge clk);
      @(negedge clk);
    end
    w_valid = 0;
    n_b_exp++;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      route_e s;
      addr_t a;
      s = route_e'($urandom_range(0, 2));
      a = addr_t'($urandom_range(0, 'hFFFF)) << 3;
      if ($urandom_range(0, 1)) do_read(a | (addr_t'(1) << 40), $urandom_range(0, 3), s);
      else do_write(a, $urandom_range(0, 3), s, $urandom_range(0, 3) == 0);
    end
    repeat (200) @(posedge clk);
    chk("all reads answered", rd_q.size() == 0);
    chk("all writes answered", n_b == n_b_exp);
    chk("other-port stall seen", switch_stalls > 0);
    // written words are in the right memory only
    begin
      int in_tgt = 0, in_err = 0;
      foreach (u_tgt.mem[k]) begin in_tgt++; chk("tgt data", u_tgt.mem[k] == {8'h5A, 56'(k)}); end
      foreach (u_err.mem[k]) begin in_err++; chk("err data", u_err.mem[k] == {8'h5A, 56'(k)}); end
      chk("both memories written", in_tgt > 0 && in_err > 0);
    end
    $display("switch stalls: %0d", switch_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
