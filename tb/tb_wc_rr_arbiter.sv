// tb_wc_rr_arbiter - self-checking test of the round-robin arbiter.
//
// Checks, for N=2 and N=3 requesters, that the grant is one-hot and goes to a
// requester, that a lone request is granted in the same cycle, that permanent
// requesters are served in strict rotation, and, for random request patterns,
// that a waiting request is granted within N-1 cycles of being raised.
module tb_wc_rr_arbiter;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [1:0] req2, gnt2; logic idx2;
  logic [2:0] req3, gnt3; logic [1:0] idx3;

  wc_rr_arbiter #(.N(2)) dut2 (.clk_i(clk), .rst_ni(rst_n), .req_i(req2), .gnt_o(gnt2), .idx_o(idx2));
  wc_rr_arbiter #(.N(3)) dut3 (.clk_i(clk), .rst_ni(rst_n), .req_i(req3), .gnt_o(gnt3), .idx_o(idx3));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int wait3 [3];
  logic [2:0] g3;
  initial begin
    req2 = 0; req3 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // lone requests
    req2 = 2'b10; #1 chk("lone req 1", gnt2 == 2'b10 && idx2 == 1'b1);
    @(negedge clk);
    req2 = 2'b01; #1 chk("lone req 0", gnt2 == 2'b01 && idx2 == 1'b0);
    @(negedge clk);
    // both requesting: strict alternation
    req2 = 2'b11;
    begin
      logic [1:0] prev;
      #1 prev = gnt2;
      for (int i = 0; i < 10; i++) begin
        @(negedge clk); #1;
        chk("alternation", gnt2 == ~prev && $onehot(gnt2));
        prev = gnt2;
      end
    end
    req2 = 0;
    // N=3 rotation with all requesting
    req3 = 3'b111;
    begin
      logic [2:0] prev3;
      #1 prev3 = gnt3;
      for (int i = 0; i < 9; i++) begin
        @(negedge clk); #1;
        chk("rotation3", gnt3 == {prev3[1:0], prev3[2]});
        prev3 = gnt3;
      end
    end
    // random: held requests are served within N-1 cycles
    wait3 = '{0, 0, 0};
    req3 = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      for (int r = 0; r < 3; r++) begin
        if (!req3[r]) req3[r] = ($urandom_range(0, 2) == 0);
      end
      #1;
      chk("onehot3", $onehot0(gnt3) && (gnt3 & ~req3) == 0 && (req3 == 0 || gnt3 != 0));
      for (int r = 0; r < 3; r++) begin
        if (gnt3[r]) begin wait3[r] = 0; end
        else if (req3[r]) begin
          wait3[r]++;
          chk("bounded wait", wait3[r] <= 2);
        end
      end
      // granted requests drop after the clock edge
      g3 = gnt3;
      @(posedge clk); #1;
      req3 = req3 & ~g3;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
