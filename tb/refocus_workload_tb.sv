// refocus_workload_tb -- scaled-down versions of the evaluated settings:
//  A: M = 3, 5 taps, 3 colour channels, 12 x 18 frames, a = 1/3, 0/3, 2/3
//     and a saturating all-closed matrix (the M = 3 captures);
//  B: M = 5, 5 taps, 10 x 10 frames, a = 1/5 and 0/5 (the single a = 1/5
//     filter of the FPGA utilisation figures, and the M = 5 captures);
//  C: M = 11, 11 taps, 22 x 22 frames, a = 1/11 and 0/11 (the micro image
//     size of the 3201 x 3201 benchmark).
// Every output pixel and every frame latency is checked; nearest-neighbour
// holds must occur in each run, saturation in A (with TAPS = M, as in B and
// C, a sum of M values rounded from v/M cannot exceed 255).
module refocus_workload_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic da, db, dc;
  int ca, fa, cla, ha, ma;
  int cb, fb, clb, hb, mb;
  int cc, fc, clc, hc, mc;

  refocus_top_harness #(.CH(3), .L(12), .K(18), .M(3),  .TAPS(5),  .FRAMES(16)) h_a
    (.clk(clk), .done(da), .checks(ca), .failures(fa), .n_clip(cla), .n_hold(ha), .n_mode(ma));
  refocus_top_harness #(.CH(1), .L(10), .K(10), .M(5),  .TAPS(5),  .FRAMES(9)) h_b
    (.clk(clk), .done(db), .checks(cb), .failures(fb), .n_clip(clb), .n_hold(hb), .n_mode(mb));
  refocus_top_harness #(.CH(1), .L(22), .K(22), .M(11), .TAPS(11), .FRAMES(9)) h_c
    (.clk(clk), .done(dc), .checks(cc), .failures(fc), .n_clip(clc), .n_hold(hc), .n_mode(mc));

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb + cc, fa + fb + fc + 1);
    $finish;
  end

  initial begin
    int checks, failures;
    repeat (2) @(posedge clk);
    wait (da && db && dc);
    checks = ca + cb + cc;
    failures = fa + fb + fc;
    $display("A: clips %0d holds %0d matrix changes %0d", cla, ha, ma);
    $display("B: clips %0d holds %0d matrix changes %0d", clb, hb, mb);
    $display("C: clips %0d holds %0d matrix changes %0d", clc, hc, mc);
    checks += 3;
    if (cla == 0) begin failures++; $display("FAIL saturation never seen"); end
    if (ha == 0 || hb == 0 || hc == 0)    begin failures++; $display("FAIL NN hold never seen"); end
    if (ma == 0 || mb == 0 || mc == 0)    begin failures++; $display("FAIL no matrix change"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
