// row_buffer_out_tb -- checks the parallel-to-serial row buffer: random
// frames given one K-wide row per clock must come out as one raster stream,
// row by row, first on pixel 0, starting one clock edge after the edge that
// took the last row. Frames arrive every L*K clocks, as the serial input
// side of the pipeline delivers them, so both banks are used in turn.
module row_buffer_out_tb;
  import refocus_pkg::*;

  localparam int L = 3, K = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, n = 0;
  logic rst_n, frame_ready;
  pix_t in_pix [K];
  pix_t out_pix;
  int   exp_q [$];
  int   exp_t [$];

  row_buffer_out dut (.*);

  always @(posedge clk) cyc++;

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    forever begin
      @(posedge clk); #1;
      if (out_pix.valid) begin
        if (n % (L * K) == 0) begin
          chk(exp_t.size() > 0, 1, "output without frame");
          if (exp_t.size() > 0) chk(cyc, exp_t.pop_front(), "pixel 0 clock");
        end
        chk(out_pix.first, n % (L * K) == 0, "first flag");
        chk(out_pix.data, exp_q.pop_front(), $sformatf("pixel %0d", n));
        n++;
      end
    end
  end

  initial begin
    rst_n = 1'b0;
    foreach (in_pix[c]) in_pix[c] = PIX_IDLE;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int f = 0; f < 8; f++) begin
      int fr [L][K];
      int t_start;
      t_start = cyc;
      foreach (fr[l, k]) begin
        fr[l][k] = $urandom_range(0, 255);
        exp_q.push_back(fr[l][k]);
      end
      for (int l = 0; l < L; l++) begin
        for (int c = 0; c < K; c++)
          in_pix[c] = '{valid: 1'b1, first: (l == 0), data: 8'(fr[l][c])};
        if (l == L - 1) exp_t.push_back(cyc + 2);
        @(negedge clk);
      end
      foreach (in_pix[c]) in_pix[c] = PIX_IDLE;
      while (cyc - t_start < L * K) @(negedge clk);
    end
    repeat (L * K + 5) @(negedge clk);
    chk(n, 8 * L * K, "pixels out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
