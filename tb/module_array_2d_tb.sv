// module_array_2d_tb -- runs the 2-D array harness at the default size
// (3 x 3) and at 6 rows x 9 columns, and checks that back-to-back frames,
// gapped frames and matrix changes all happened.
module module_array_2d_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic done_a, done_b;
  int ca, fa, ba, ga, cla, cb, fb, bb, gb, clb;
  int checks, failures;

  module_array_2d_harness                       h_a (.clk(clk), .done(done_a), .checks(ca), .failures(fa),
                                                     .n_backtoback(ba), .n_gap(ga), .n_clip(cla));
  module_array_2d_harness #(.L(6), .K(9), .FRAMES(15)) h_b (.clk(clk), .done(done_b), .checks(cb), .failures(fb),
                                                     .n_backtoback(bb), .n_gap(gb), .n_clip(clb));

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb, fa + fb + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    wait (done_a && done_b);
    checks = ca + cb + 2;
    failures = fa + fb;
    if (ba == 0 || bb == 0) begin failures++; $display("FAIL no back-to-back frame"); end
    if (ga == 0 || gb == 0) begin failures++; $display("FAIL no gapped frame"); end
    $display("back-to-back %0d/%0d gapped %0d/%0d clip %0d/%0d", ba, bb, ga, gb, cla, clb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
