// skew_delay_tb -- checks the skew registers for depths 0, 1 and 4 with a
// random stream: the output must be the input exactly DEPTH clocks earlier.
module skew_delay_tb;
  import refocus_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic rst_n;
  pix_t d, q0, q1, q4;
  pix_t hist [$];

  skew_delay #(.DEPTH(0)) dut0 (.clk(clk), .rst_n(rst_n), .d(d), .q(q0));
  skew_delay              dut  (.clk(clk), .rst_n(rst_n), .d(d), .q(q1));
  skew_delay #(.DEPTH(4)) dut4 (.clk(clk), .rst_n(rst_n), .d(d), .q(q4));

  task automatic chk(pix_t got, pix_t exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
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
    rst_n = 1'b0; d = PIX_IDLE;
    repeat (2) @(posedge clk);
    #1 chk(q4, PIX_IDLE, "reset clears");
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      d = pix_t'($urandom);
      hist.push_front(d);
      #1 chk(q0, d, "depth 0 is a wire");
      @(posedge clk); #1;
      chk(q1, hist[0], "depth 1");
      if (hist.size() >= 4) chk(q4, hist[3], "depth 4");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
