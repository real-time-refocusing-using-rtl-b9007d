// refocus_top_harness -- drives one refocus_top of any size with random
// frames and checks every output pixel and the frame latency against the
// separable reference of refocus_ref_pkg. It walks through the settings
// a = 1/M (reset matrix), a = 0/M (nearest neighbour: switch p of the last
// M taps closed in row p, write enable in row M-1), a = 2/3 when M = 3, and
// an all-closed matrix on bright frames that drives sums into saturation.
module refocus_top_harness
  import refocus_pkg::*;
  import refocus_ref_pkg::*;
#(
  parameter int unsigned CH     = 1,
  parameter int unsigned L      = 6,
  parameter int unsigned K      = 6,
  parameter int unsigned M      = 3,
  parameter int unsigned TAPS   = 5,
  parameter int unsigned FRAMES = 16
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_clip,
  output int   n_hold,
  output int   n_mode
);

  localparam int unsigned PW = (M > 1) ? $clog2(M) : 1;

  logic          rst_n, cfg_we, in_valid, in_first, out_valid, out_first, frame_done, clip;
  logic [PW-1:0] cfg_row;
  logic [TAPS:0] cfg_data;
  logic [CH-1:0][7:0] in_data, out_data;

  refocus_top #(.CHANNELS(CH), .L(L), .K(K), .M(M), .TAPS(TAPS)) dut (.*);

  int exp_q [CH][$];
  int exp_t [$];
  int n_out, cyc;

  initial cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (clip) n_clip++;
  always @(posedge clk)
    if (dut.g_ch[0].u_array.g_row[0].u_hproc.u_fir.v1 && !dut.g_ch[0].u_array.g_row[0].u_hproc.u_fir.we1)
      n_hold++;

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL M%0d L%0d K%0d %s: got %0d expected %0d", M, L, K, what, got, exp);
    end
  endtask

  initial begin
    n_out = 0;
    forever begin
      @(posedge clk); #1;
      if (out_valid) begin
        if (n_out % (L * K) == 0) begin
          chk(exp_t.size() > 0, 1, "output without frame");
          if (exp_t.size() > 0) chk(cyc, exp_t.pop_front(), "latency to pixel 0");
        end
        for (int ch = 0; ch < CH; ch++)
          chk(out_data[ch], exp_q[ch].pop_front(), $sformatf("ch %0d pixel %0d", ch, n_out));
        n_out++;
      end
    end
  end

  function automatic logic [15:0] mode_row(int mode, int p);
    logic [15:0] r;
    r = '0;
    case (mode)
      0: begin r[TAPS] = 1'b1; for (int w = TAPS - M; w < TAPS; w++) r[w] = 1'b1; end
      1: begin r[TAPS] = (p == M - 1); r[TAPS - M + p] = 1'b1; end
      2: r = 16'(LUT_A2_M3[p]);
      default: begin r[TAPS] = 1'b1; for (int w = 0; w < TAPS; w++) r[w] = 1'b1; end
    endcase
    return r;
  endfunction

  initial begin
    logic [15:0] lut [];
    int hrow [CH][L];
    int hcol [CH][K];
    int modes [$];
    done = 1'b0; checks = 0; failures = 0; n_clip = 0; n_hold = 0; n_mode = 0;
    rst_n = 1'b0; cfg_we = 1'b0; cfg_row = '0; cfg_data = '0;
    in_valid = 1'b0; in_first = 1'b0; in_data = '0;
    foreach (hrow[c, l]) hrow[c][l] = 0;
    foreach (hcol[c, k]) hcol[c][k] = 0;
    modes = (M == 3 && TAPS == 5) ? '{0, 1, 2, 3} : '{0, 1, 3};
    lut = new[M];
    foreach (lut[r]) lut[r] = mode_row(0, r);
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    for (int f = 0; f < FRAMES; f++) begin
      int fr [CH][L][K];
      int per, mi;
      per = (FRAMES + modes.size() - 1) / modes.size();
      mi = f / per;
      if (f % per == 0 && f > 0) begin
        repeat (2 * L * K + K + L + 12) @(negedge clk);
        for (int r = 0; r < M; r++) begin
          lut[r] = mode_row(modes[mi], r);
          cfg_we = 1'b1; cfg_row = PW'(r); cfg_data = lut[r][TAPS:0];
          @(negedge clk);
        end
        cfg_we = 1'b0;
        n_mode++;
      end else if (f % 2 == 1) begin
        repeat ($urandom_range(1, 4)) @(negedge clk);
      end
      foreach (fr[c, l, k]) fr[c][l][k] = (modes[mi] == 3) ? $urandom_range(150, 255) : $urandom_range(0, 255);
      for (int c = 0; c < CH; c++) begin
        int_q h [L];
        for (int l = 0; l < L; l++) begin
          int_q x;
          x = {};
          for (int k = 0; k < K; k++) x.push_back(fr[c][l][k]);
          h[l] = ref_line(x, lut, M, TAPS, M, hrow[c][l]);
        end
        begin
          int v [K][L];
          for (int k = 0; k < K; k++) begin
            int_q x, y;
            x = {};
            for (int l = 0; l < L; l++) x.push_back(h[l][k]);
            y = ref_line(x, lut, M, TAPS, M, hcol[c][k]);
            for (int l = 0; l < L; l++) v[k][l] = y[l];
          end
          for (int l = 0; l < L; l++)
            for (int k = 0; k < K; k++) exp_q[c].push_back(v[k][l]);
        end
      end
      for (int l = 0; l < L; l++)
        for (int k = 0; k < K; k++) begin
          in_valid = 1'b1;
          in_first = (l == 0 && k == 0);
          for (int c = 0; c < CH; c++) in_data[c] = 8'(fr[c][l][k]);
          if (l == L - 1 && k == K - 1) exp_t.push_back(cyc + 1 + K + L + 7);
          @(negedge clk);
        end
      in_valid = 1'b0; in_first = 1'b0;
    end
    repeat (2 * L * K + K + L + 20) @(negedge clk);
    chk(n_out, FRAMES * L * K, "all pixels out");
    done = 1'b1;
  end
endmodule
