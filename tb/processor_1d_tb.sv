// processor_1d_tb -- checks one complete 1-D refocusing processor.
// Uses the numbers of the original worked examples: the 9-pixel row
// 7 26 63 | 30 17 54 | 121 48 231 refocused to 34 (a = 0/3, micro image
// s1) and 67 (a = 2/3), and the row 90 16 33 50 ... whose scaled values
// give the a = 1/3 outputs 30 35 46 33 50 67 84 and the a = 0/3 sums 46, 67,
// and the ramp 37 74 ... 222 whose a = 1/3 sums are 74 111 148 185.
// Then random lines with the three matrices, compared with the direct-form
// reference, and the three-clock latency.
module processor_1d_tb;
  import refocus_pkg::*;
  import refocus_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic       rst_n, cfg_we, out_clip;
  logic [1:0] cfg_row;
  logic [5:0] cfg_data;
  pix_t       in_pix, out_pix;
  int         hold = 0;
  logic [15:0] cur [];

  processor_1d dut (.*);

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic load(lut3x5_t m);
    cur = new[3];
    for (int r = 0; r < 3; r++) begin
      @(negedge clk); cfg_we = 1'b1; cfg_row = 2'(r); cfg_data = m[r];
      cur[r] = 16'(m[r]);
    end
    @(negedge clk) cfg_we = 1'b0;
  endtask

  // returns the output line
  task automatic run_line(int_q x, output int_q got);
    got = {};
    fork
      begin
        for (int n = 0; n < x.size(); n++) begin
          @(negedge clk);
          in_pix = '{valid: 1'b1, first: (n == 0), data: 8'(x[n])};
        end
        @(negedge clk) in_pix = PIX_IDLE;
      end
      begin
        while (got.size() < x.size()) begin
          @(posedge clk); #1;
          if (out_pix.valid) begin
            chk(out_pix.first, got.size() == 0, "first flag");
            got.push_back(out_pix.data);
          end
        end
      end
    join
  endtask

  task automatic cmp_ref(int_q x, string tag);
    int_q y, got;
    y = ref_line(x, cur, 3, 5, 3, hold);
    run_line(x, got);
    foreach (y[i]) chk(got[i], y[i], $sformatf("%s n=%0d", tag, i));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int_q x, got;
    rst_n = 1'b0; cfg_we = 1'b0; cfg_row = '0; cfg_data = '0; in_pix = PIX_IDLE;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // latency: pixel in before edge t, out after edge t+3 (default matrix a=1/3)
    @(negedge clk) in_pix = '{valid: 1'b1, first: 1'b1, data: 8'd90};
    @(negedge clk) in_pix = PIX_IDLE;
    @(posedge clk); #1 chk(out_pix.valid, 0, "latency: edge 2");
    @(posedge clk); #1 chk(out_pix.valid, 1, "latency: edge 3");
    chk(out_pix.data, 30, "90/3");

    // worked example, a = 0/3: micro image s1 sums to 34
    x = '{7, 26, 63, 30, 17, 54, 121, 48, 231};
    load(LUT_A0_M3);
    run_line(x, got);
    chk(got[5], 34, "a=0/3 micro image s1");
    chk(got[6], 34, "a=0/3 held (NN) at next pixel");
    chk(got[7], 34, "a=0/3 held (NN) two pixels on");
    load(LUT_A2_M3);
    run_line(x, got);
    chk(got[6], 67, "a=2/3 rays of s0,s1,s2");

    // timing-diagram row
    x = '{90, 16, 33, 50, 67, 84, 101, 118, 135};
    load(LUT_A1_M3);
    run_line(x, got);
    begin
      int e [7] = '{30, 35, 46, 33, 50, 67, 84};
      foreach (e[i]) chk(got[i], e[i], $sformatf("a=1/3 diagram output %0d", i));
    end
    // simulator trace of the original a = 1/3 filter: scaled pixels
    // 12 25 37 49 62 74 1 (inputs 37 ... 222, 3) give the sums 74 111 148 185
    x = '{37, 74, 111, 148, 185, 222, 3, 40};
    run_line(x, got);
    begin
      int e [4] = '{74, 111, 148, 185};
      foreach (e[i]) chk(got[i + 2], e[i], $sformatf("a=1/3 trace output %0d", i));
    end
    load(LUT_A0_M3);
    run_line(x, got);
    chk(got[2], 25 + 12 + 37, "a=0/3 trace first micro image");
    x = '{90, 16, 33, 50, 67, 84, 101, 118, 135};
    run_line(x, got);
    chk(got[2], 46, "a=0/3 first micro image");
    chk(got[5], 67, "a=0/3 second micro image");
    hold = got[8];

    // random lines against the reference
    for (int t = 0; t < 30; t++) begin
      lut3x5_t m;
      m = (t % 3 == 0) ? LUT_A0_M3 : (t % 3 == 1) ? LUT_A1_M3 : LUT_A2_M3;
      load(m);
      x = {};
      for (int n = 0; n < 3 * (1 + $urandom_range(0, 6)); n++) x.push_back($urandom_range(0, 255));
      cmp_ref(x, $sformatf("random line %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
