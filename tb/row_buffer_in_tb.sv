// row_buffer_in_tb -- checks the serial-to-parallel row buffer: random
// raster frames, sent back to back and with idle clocks between pixels, must
// come out as L parallel rows, column 0 first, starting one clock edge after
// the edge that took the frame's last pixel. Both memory banks are used.
module row_buffer_in_tb;
  import refocus_pkg::*;

  localparam int L = 3, K = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, n_frames_out = 0;
  logic rst_n, frame_ready;
  pix_t in_pix;
  pix_t out_pix [L];
  int   exp_q [$];
  int   exp_t [$];

  row_buffer_in dut (.*);

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

  // monitor
  initial begin
    int k;
    k = 0;
    forever begin
      @(posedge clk); #1;
      if (out_pix[0].valid) begin
        if (k == 0) begin
          chk(exp_t.size() > 0, 1, "output without a frame");
          if (exp_t.size() > 0) chk(cyc, exp_t.pop_front(), "column 0 clock");
          n_frames_out++;
        end
        chk(out_pix[0].first, k == 0, "first flag on column 0");
        for (int l = 0; l < L; l++) begin
          chk(out_pix[l].valid, 1, "rows valid together");
          chk(out_pix[l].data, exp_q.pop_front(), $sformatf("row %0d col %0d", l, k));
        end
        k = (k + 1) % K;
      end
    end
  end

  initial begin
    rst_n = 1'b0; in_pix = PIX_IDLE;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int f = 0; f < 10; f++) begin
      int fr [L][K];
      foreach (fr[l, k]) fr[l][k] = $urandom_range(0, 255);
      for (int k = 0; k < K; k++)
        for (int l = 0; l < L; l++) exp_q.push_back(fr[l][k]);
      for (int l = 0; l < L; l++)
        for (int k = 0; k < K; k++) begin
          if (f >= 5 && $urandom_range(0, 2) == 0) begin
            in_pix = PIX_IDLE;
            repeat ($urandom_range(1, 3)) @(negedge clk);
          end
          in_pix = '{valid: 1'b1, first: (l == 0 && k == 0), data: 8'(fr[l][k])};
          if (l == L - 1 && k == K - 1) exp_t.push_back(cyc + 2);
          @(negedge clk);
        end
      in_pix = PIX_IDLE;
    end
    repeat (K + 5) @(negedge clk);
    chk(n_frames_out, 10, "frames out");
    chk(exp_q.size(), 0, "all pixels out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
