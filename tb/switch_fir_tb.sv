// switch_fir_tb -- checks the switch-driven FIR core on its own.
// Pixels are fed already scaled; switch rows come from the testbench, which
// cycles through the a = 0/3, 1/3 and 2/3 matrices and random matrices and
// compares every output with a direct-form sum (refocus_ref_pkg, fed with
// M = 1 so that no scaling is applied). Also checks the two-clock latency,
// saturation with the clip flag, and that the chain restarts on a first
// pixel.
module switch_fir_tb;
  import refocus_pkg::*;
  import refocus_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic       rst_n, in_valid, in_first, we, out_valid, out_first, out_clip;
  logic [7:0] in_data, out_data;
  logic [4:0] sw;
  int         n_clip = 0;

  switch_fir dut (.*);

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // drive one line with a matrix of nrow rows; compare with the reference
  task automatic run_line(int_q x, logic [15:0] lut [], int nrow, inout int hold,
                          input string tag);
    int_q xs, y;
    int   k;
    logic [15:0] lutp [];
    // reference uses the matrix on scaled values: scale factor 1 here,
    // but rows indexed modulo nrow
    y = ref_line(x, lut, nrow, 5, 1, hold);
    k = 0;
    fork
      begin
        for (int n = 0; n < x.size(); n++) begin
          logic [15:0] r;
          @(negedge clk);
          r = lut[n % nrow];
          in_valid = 1'b1; in_first = (n == 0); in_data = 8'(x[n]);
          sw = r[4:0]; we = r[5];
        end
        @(negedge clk) in_valid = 1'b0; in_first = 1'b0;
      end
      begin
        while (k < x.size()) begin
          @(posedge clk); #1;
          if (out_valid) begin
            chk(out_data, y[k], $sformatf("%s n=%0d", tag, k));
            chk(out_first, k == 0, $sformatf("%s first n=%0d", tag, k));
            if (out_clip) n_clip++;
            k++;
          end
        end
      end
    join
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] a0 [], a1 [], a2 [], rnd [], sat [];
    int_q x;
    int hold = 0;
    a0 = new[3]; a1 = new[3]; a2 = new[3]; sat = new[1];
    a0[0] = mk_row("100", 5, 0); a0[1] = mk_row("010", 5, 0); a0[2] = mk_row("001", 5, 1);
    foreach (a1[i]) a1[i] = mk_row("111", 5, 1);
    a2[0] = mk_row("00111", 5, 1); a2[1] = mk_row("01110", 5, 1); a2[2] = mk_row("11100", 5, 1);
    sat[0] = mk_row("11111", 5, 1);

    rst_n = 1'b0; in_valid = 1'b0; in_first = 1'b0; in_data = '0; sw = '0; we = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // latency: first pixel in at edge t, out_valid after edge t+2
    @(negedge clk); in_valid = 1'b1; in_first = 1'b1; in_data = 8'd7; sw = 5'b10000; we = 1'b1;
    @(posedge clk); #1 in_valid = 1'b0; in_first = 1'b0;
    chk(out_valid, 0, "not yet after one clock");
    @(posedge clk); #1 chk(out_valid, 1, "valid after two clocks");
    chk(out_data, 7, "single tap value");
    hold = 7;

    // scaled diagram values (products of 90,16,33,50,67,84,101,118,135 / 3)
    x = '{30, 5, 11, 17, 22, 28, 34, 39, 45};
    run_line(x, a1, 3, hold, "a=1/3");
    run_line(x, a0, 3, hold, "a=0/3");
    run_line(x, a2, 3, hold, "a=2/3");
    for (int t = 0; t < 40; t++) begin
      int len;
      x = {};
      len = 1 + $urandom_range(0, 20);
      for (int n = 0; n < len; n++) x.push_back($urandom_range(0, 120));
      rnd = new[1 + $urandom_range(0, 4)];
      foreach (rnd[i]) rnd[i] = 16'($urandom_range(0, 63));
      run_line(x, rnd, rnd.size(), hold, $sformatf("random %0d", t));
      run_line(x, (t % 3 == 0) ? a0 : (t % 3 == 1) ? a1 : a2, 3, hold, "paper matrix");
    end
    // saturation: five taps of 200
    x = '{200, 200, 200, 200, 200, 10};
    run_line(x, sat, 1, hold, "saturation");
    checks++;
    if (n_clip == 0) begin failures++; $display("FAIL clip never raised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
