// tb_wc_sizes - the M-WC at the other slot counts of the paper's evaluation.
//
// The paper sweeps the number of rules (2, 4, 8, 16, 32) and, for the SoC
// estimate, uses 16 and 64 rules. The default (16) is covered by the main
// end-to-end test; this one runs 2, 32 and 64 slots side by side, plus 16
// slots with 8 perm entries each (the largest entry count proposed), each with
// regions owned by WIDs spread over 0..127, and checks access outcomes and
// the two-cycle overhead at every size. See tb_wc_size_case for the pattern.
module tb_wc_sizes;
  logic clk = 0;
  always #5 clk = ~clk;

  int c2, f2, c32, f32, c64, f64, c8p, f8p;
  logic d2, d32, d64, d8p;

  tb_wc_size_case #(.NS(2))  u_ns2  (.clk_i(clk), .checks_o(c2),  .failures_o(f2),  .done_o(d2));
  tb_wc_size_case #(.NS(32)) u_ns32 (.clk_i(clk), .checks_o(c32), .failures_o(f32), .done_o(d32));
  tb_wc_size_case #(.NS(64)) u_ns64 (.clk_i(clk), .checks_o(c64), .failures_o(f64), .done_o(d64));
  tb_wc_size_case #(.NS(16), .NP(8)) u_np8 (.clk_i(clk), .checks_o(c8p), .failures_o(f8p), .done_o(d8p));

  initial begin
    fork
      begin
        wait (d2 && d32 && d64 && d8p);
        repeat (2) @(posedge clk);
        $display("NS=2: %0d checks, NS=32: %0d checks, NS=64: %0d checks, NS=16 NP=8: %0d checks",
                 c2, c32, c64, c8p);
        $display("TB_RESULT checks=%0d failures=%0d", c2 + c32 + c64 + c8p + 4,
                 f2 + f32 + f64 + f8p + int'(c2 < 5) + int'(c32 < 100) + int'(c64 < 200) + int'(c8p < 50));
      end
      begin
        repeat (200000) @(posedge clk);
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", c2 + c32 + c64 + c8p, f2 + f32 + f64 + f8p + 1);
      end
    join_any
    $finish;
  end
endmodule
