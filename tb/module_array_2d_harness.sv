// module_array_2d_harness -- drives one module_array_2d of size L x K with
// random frames and checks every output row against a separable reference
// (refocus_ref_pkg: rows first, then columns, each with its own held output
// value). Frames are sent back to back (one every K clocks) and with idle
// gaps of at least L clocks, with the a = 0/3, 1/3 and 2/3 matrices. The
// output row l of a frame must appear exactly K + l + 4 clock edges after the
// edge that took in the frame's column 0.
module module_array_2d_harness
  import refocus_pkg::*;
  import refocus_ref_pkg::*;
#(
  parameter int unsigned L = 3,
  parameter int unsigned K = 3,
  parameter int unsigned FRAMES = 12
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_backtoback,
  output int   n_gap,
  output int   n_clip
);

  logic       rst_n, cfg_we, clip;
  logic [1:0] cfg_row;
  logic [5:0] cfg_data;
  pix_t       in_pix [L];
  pix_t       out_pix [K];

  module_array_2d #(.L(L), .K(K)) dut (.*);

  int exp_q [$];       // expected pixels, row by row
  int exp_t [$];       // expected clock of each row
  int cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (clip) n_clip++;

  int hrow [L];        // held output value per row processor
  int hcol [K];        // held output value per column processor

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL L%0d K%0d %s: got %0d expected %0d", L, K, what, got, exp);
    end
  endtask

  // output monitor
  initial begin
    forever begin
      @(posedge clk); #1;
      if (out_pix[0].valid) begin
        chk(exp_t.size() > 0, 1, "unexpected output row");
        if (exp_t.size() > 0) begin
          int t;
          t = exp_t.pop_front();
          chk(cyc, t, "output row clock");
          for (int c = 0; c < K; c++) begin
            chk(out_pix[c].valid, 1, "all columns valid together");
            chk(out_pix[c].data, exp_q.pop_front(), $sformatf("pixel col %0d", c));
          end
        end
      end
    end
  end

  initial begin
    logic [15:0] lut [];
    done = 1'b0; checks = 0; failures = 0; n_backtoback = 0; n_gap = 0; n_clip = 0;
    rst_n = 1'b0; cfg_we = 1'b0; cfg_row = '0; cfg_data = '0;
    foreach (in_pix[l]) in_pix[l] = PIX_IDLE;
    foreach (hrow[l]) hrow[l] = 0;
    foreach (hcol[c]) hcol[c] = 0;
    lut = new[3];
    foreach (lut[r]) lut[r] = 16'(LUT_A1_M3[r]);
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int f = 0; f < FRAMES; f++) begin
      int fr [L][K];
      int_q h [L];
      int   t0;
      bit   gap;
      // new matrix every third frame, after an idle gap
      if (f % 3 == 0) begin
        lut3x5_t m;
        m = (f % 9 == 0) ? LUT_A1_M3 : (f % 9 == 3) ? LUT_A0_M3 : LUT_A2_M3;
        repeat (L + K + 8) @(negedge clk);
        for (int r = 0; r < 3; r++) begin
          cfg_we = 1'b1; cfg_row = 2'(r); cfg_data = m[r]; lut[r] = 16'(m[r]);
          @(negedge clk);
        end
        cfg_we = 1'b0;
      end
      gap = (f % 3 == 1);
      if (gap) begin
        repeat (L + $urandom_range(0, 3)) @(negedge clk);
        n_gap++;
      end else if (f % 3 == 2) n_backtoback++;
      foreach (fr[l, k]) fr[l][k] = (f == FRAMES - 1) ? 250 : $urandom_range(0, 255);
      // reference
      for (int l = 0; l < L; l++) begin
        int_q x;
        x = {};
        for (int k = 0; k < K; k++) x.push_back(fr[l][k]);
        h[l] = ref_line(x, lut, 3, 5, 3, hrow[l]);
      end
      begin
        int v [K][L];
        for (int c = 0; c < K; c++) begin
          int_q x, y;
          x = {};
          for (int l = 0; l < L; l++) x.push_back(h[l][c]);
          y = ref_line(x, lut, 3, 5, 3, hcol[c]);
          for (int l = 0; l < L; l++) v[c][l] = y[l];
        end
        t0 = cyc + 1;    // clock edge that samples column 0
        for (int l = 0; l < L; l++) begin
          exp_t.push_back(t0 + K + l + 4);
          for (int c = 0; c < K; c++) exp_q.push_back(v[c][l]);
        end
      end
      for (int k = 0; k < K; k++) begin
        for (int l = 0; l < L; l++)
          in_pix[l] = '{valid: 1'b1, first: (k == 0), data: 8'(fr[l][k])};
        @(negedge clk);
      end
      foreach (in_pix[l]) in_pix[l] = PIX_IDLE;
    end
    repeat (L + 2 * K + 20) @(negedge clk);
    chk(exp_t.size(), 0, "all output rows seen");
    done = 1'b1;
  end
endmodule
