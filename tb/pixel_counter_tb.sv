// pixel_counter_tb -- checks the demultiplexer counter: 0 in the start
// cycle, then counting modulo K, and a restart at any point.
module pixel_counter_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic       rst_n, start;
  logic [1:0] count;
  logic [2:0] count7;

  pixel_counter dut (.*);
  pixel_counter #(.K(7)) dut7 (.clk(clk), .rst_n(rst_n), .start(start), .count(count7));

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp3, exp7;
    rst_n = 1'b0; start = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    exp3 = 0; exp7 = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      start = ($urandom_range(0, 9) == 0);
      #1;
      if (start) begin exp3 = 0; exp7 = 0; end
      chk(count, exp3, $sformatf("K=3 t=%0d", t));
      chk(count7, exp7, $sformatf("K=7 t=%0d", t));
      exp3 = (exp3 + 1) % 3;
      exp7 = (exp7 + 1) % 7;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
