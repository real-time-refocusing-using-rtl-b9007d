// switch_lut_tb -- checks the switch-matrix LUT and its row sequencing.
// After reset the a = 1/M matrix must be present; after loading the a = 2/3
// matrix the rows must come out in order 0,1,2,0,... one per stepped pixel,
// hold while not stepping, and restart at row 0 on a first pixel.
module switch_lut_tb;
  import refocus_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic       rst_n, cfg_we, step, first, we;
  logic [1:0] cfg_row;
  logic [5:0] cfg_data;
  logic [4:0] sw;

  switch_lut dut (.*);

  task automatic chk(logic [5:0] got, logic [5:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  task automatic px(bit f);
    @(negedge clk); step = 1'b1; first = f;
    @(posedge clk); #1; step = 1'b0; first = 1'b0;
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; cfg_we = 1'b0; cfg_row = '0; cfg_data = '0; step = 1'b0; first = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // reset contents: a = 1/3, taps 2..4 closed, we on
    for (int n = 0; n < 4; n++) begin
      px(n == 0);
      chk({we, sw}, 6'b1_11100, "reset matrix");
    end
    // load a = 2/3
    for (int r = 0; r < 3; r++) begin
      @(negedge clk); cfg_we = 1'b1; cfg_row = 2'(r); cfg_data = LUT_A2_M3[r];
    end
    @(negedge clk) cfg_we = 1'b0;
    for (int n = 0; n < 8; n++) begin
      px(n == 0);
      chk({we, sw}, LUT_A2_M3[n % 3], $sformatf("a=2/3 pixel %0d", n));
      if (n == 3) begin
        // no step: output holds
        repeat (3) @(posedge clk);
        #1 chk({we, sw}, LUT_A2_M3[0], "hold without step");
      end
    end
    // restart in the middle of the cycle
    px(1'b0);                       // row 2 (n = 8)
    chk({we, sw}, LUT_A2_M3[2], "row 2");
    px(1'b1);
    chk({we, sw}, LUT_A2_M3[0], "first pixel restarts at row 0");
    px(1'b0);
    chk({we, sw}, LUT_A2_M3[1], "then row 1");
    // reload one row with a = 0/3
    @(negedge clk); cfg_we = 1'b1; cfg_row = 2'd2; cfg_data = LUT_A0_M3[2];
    @(negedge clk) cfg_we = 1'b0;
    px(1'b0);
    chk({we, sw}, LUT_A0_M3[2], "rewritten row");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
