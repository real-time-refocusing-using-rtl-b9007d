// stored_product_rom_tb -- checks the 1/M product table.
// Every address for M = 3 (default), M = 5 and M = 11 against real-valued
// rounding, the worked values of the original timing diagrams, and the
// one-clock read latency.
module stored_product_rom_tb;
  import refocus_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [7:0] addr;
  logic [7:0] d3, d5, d11;

  stored_product_rom dut (.clk(clk), .addr(addr), .data(d3));
  stored_product_rom #(.PIX_W(8), .M(5))  dut5  (.clk(clk), .addr(addr), .data(d5));
  stored_product_rom #(.PIX_W(8), .M(11)) dut11 (.clk(clk), .addr(addr), .data(d11));

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int figv [5] = '{16, 50, 101, 185, 222};
    int fige [5] = '{5, 17, 34, 62, 74};
    addr = 0;
    @(negedge clk);
    for (int v = 0; v < 256; v++) begin
      addr = 8'(v);
      @(posedge clk); #1;
      chk(d3,  ref_prod(v, 3),  $sformatf("M=3 v=%0d", v));
      chk(d5,  ref_prod(v, 5),  $sformatf("M=5 v=%0d", v));
      chk(d11, ref_prod(v, 11), $sformatf("M=11 v=%0d", v));
    end
    foreach (figv[i]) begin
      addr = 8'(figv[i]);
      @(posedge clk); #1;
      chk(d3, fige[i], $sformatf("diagram value %0d", figv[i]));
    end
    // latency: the data changes only at the clock edge after addr
    @(negedge clk); addr = 8'd90; @(posedge clk); #1;
    addr = 8'd3; #2;
    chk(d3, 30, "registered read holds until the next edge");
    @(posedge clk); #1;
    chk(d3, 1, "new value one clock later");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
