// tb_wc_err_handler - self-checking test of the error handler.
//
// Sends read and write bursts of random length, ID and poison flag, with
// random R/B backpressure, and checks: len+1 read beats with the request's
// ID, last only on the final beat, zero data, DECERR (bus error) or OKAY
// (poisoned) as flagged; every write beat consumed up to wlast, then one B
// with the request's ID and the flagged response; no B before wlast.
module tb_wc_err_handler;
  import wc_pkg::*;
  logic clk = 0, rst_n = 0;
  axi_req_t req;
  axi_rsp_t rsp;
  logic awp, arp;
  int checks = 0, failures = 0;

  wc_err_handler dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .aw_poison_i(awp),
                      .ar_poison_i(arp), .rsp_o(rsp));

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    req = '0; awp = 0; arp = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int len; logic p; id_t id; int beats;
      len = $urandom_range(0, 7); p = $urandom_range(0, 1); id = id_t'($urandom);
      if (n % 2 == 0) begin
        // ---- read
        @(negedge clk);
        req.ar = '0; req.ar.id = id; req.ar.len = 8'(len); req.ar_valid = 1; arp = p;
        @(posedge clk); while (!rsp.ar_ready) @(posedge clk);
        @(negedge clk); req.ar_valid = 0; arp = !p;
        beats = 0;
        while (beats <= len) begin
          req.r_ready = ($urandom_range(0, 2) != 0);
          @(posedge clk);
          if (rsp.r_valid && req.r_ready) begin
            chk("r id", rsp.r.id == id);
            chk("r data zero", rsp.r.data == '0);
            chk("r resp", rsp.r.resp == (p ? RESP_OKAY : RESP_DECERR));
            chk("r last", rsp.r.last == (beats == len));
            beats++;
          end
          @(negedge clk);
        end
        req.r_ready = 0;
        #1 chk("no extra r beat", !rsp.r_valid);
      end else begin
        // ---- write
        @(negedge clk);
        req.aw = '0; req.aw.id = id; req.aw_valid = 1; awp = p;
        @(posedge clk); while (!rsp.aw_ready) @(posedge clk);
        @(negedge clk); req.aw_valid = 0; awp = !p;
        beats = 0;
        while (beats <= len) begin
          req.w_valid = ($urandom_range(0, 2) != 0);
          req.w.data = {$urandom, $urandom};
          req.w.last = (beats == len);
          #1 chk("no b before wlast", !rsp.b_valid);
          @(posedge clk);
          if (req.w_valid && rsp.w_ready) beats++;
          @(negedge clk);
        end
        req.w_valid = 0;
        req.b_ready = 0;
        repeat ($urandom_range(0, 2)) @(negedge clk);
        #1 chk("b pending", rsp.b_valid);
        chk("b id", rsp.b.id == id);
        chk("b resp", rsp.b.resp == (p ? RESP_OKAY : RESP_DECERR));
        req.b_ready = 1;
        @(negedge clk); req.b_ready = 0;
        #1 chk("single b", !rsp.b_valid && rsp.aw_ready);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
