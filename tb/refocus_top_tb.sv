// refocus_top_tb -- end-to-end test of the refocusing pipeline at its
// default size (3 colour channels, 3 x 3 frames, M = 3, 5 taps).
//
// Random raster frames go in, with a different random image per channel;
// every output pixel is compared with a separable reference (rows, then
// columns, each 1-D processor with its own held output). The test walks
// through the refocusing settings a = 1/3 (reset), 0/3 and 2/3 and a
// five-tap all-closed matrix on bright frames, changing the matrix between
// frames. It counts, and requires at least once: matrix changes,
// nearest-neighbour holds (write-enable open), open switches, frames sent
// back to back, frames with idle gaps, and both banks of each row buffer.
// Saturation is counted but cannot occur at this size: a 3-pixel line
// summed after scaling by 1/3 never exceeds 255 (refocus_workload_tb and
// switch_fir_tb exercise it). It also checks the latency from the last input pixel of a frame
// to the first output pixel, K + L + 7 clock edges.
module refocus_top_tb;
  import refocus_pkg::*;
  import refocus_ref_pkg::*;

  localparam int CH = 3, L = 3, K = 3, M = 3, TAPS = 5;
  localparam int FRAMES = 24;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  logic       rst_n, cfg_we, in_valid, in_first, out_valid, out_first, frame_done, clip;
  logic [1:0] cfg_row;
  logic [5:0] cfg_data;
  logic [CH-1:0][7:0] in_data, out_data;

  refocus_top dut (.*);

  int exp_q [CH][$];
  int exp_t [$];
  int n_out = 0;
  int n_mode = 0, n_hold = 0, n_open = 0, n_clip = 0, n_b2b = 0, n_gap = 0;
  int n_bank_in [2] = '{0, 0};
  int n_bank_out [2] = '{0, 0};

  always @(posedge clk) cyc++;

  // mechanism counters
  always @(posedge clk) begin
    if (clip) n_clip++;
    if (dut.g_ch[0].u_array.g_row[0].u_hproc.u_fir.v1 && !dut.g_ch[0].u_array.g_row[0].u_hproc.u_fir.we1)
      n_hold++;
    if (dut.g_ch[0].u_array.g_row[0].u_hproc.u_fir.v1 &&
        dut.g_ch[0].u_array.g_row[0].u_hproc.u_fir.sw[4:2] != 3'b111)
      n_open++;
    if (dut.g_ch[0].u_rbin.frame_ready) n_bank_in[dut.g_ch[0].u_rbin.rbank]++;
    if (dut.g_ch[0].u_rbout.frame_ready) n_bank_out[dut.g_ch[0].u_rbout.rbank]++;
  end

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  initial begin
    forever begin
      @(posedge clk); #1;
      if (out_valid) begin
        if (n_out % (L * K) == 0) begin
          chk(exp_t.size() > 0, 1, "output without frame");
          if (exp_t.size() > 0) chk(cyc, exp_t.pop_front(), "latency to pixel 0");
        end
        chk(out_first, n_out % (L * K) == 0, "out_first");
        for (int ch = 0; ch < CH; ch++)
          chk(out_data[ch], exp_q[ch].pop_front(), $sformatf("ch %0d pixel %0d", ch, n_out));
        n_out++;
      end
    end
  end

  initial begin
    logic [15:0] lut [];
    int hrow [CH][L];
    int hcol [CH][K];
    rst_n = 1'b0; cfg_we = 1'b0; cfg_row = '0; cfg_data = '0;
    in_valid = 1'b0; in_first = 1'b0; in_data = '0;
    foreach (hrow[c, l]) hrow[c][l] = 0;
    foreach (hcol[c, k]) hcol[c][k] = 0;
    lut = new[M];
    foreach (lut[r]) lut[r] = 16'(LUT_A1_M3[r]);
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    for (int f = 0; f < FRAMES; f++) begin
      int fr [CH][L][K];
      // change the matrix every sixth frame, after the pipeline has drained
      if (f % 6 == 0 && f > 0) begin
        logic [5:0] m [M];
        case (f / 6)
          1: foreach (m[r]) m[r] = LUT_A0_M3[r];
          2: foreach (m[r]) m[r] = LUT_A2_M3[r];
          default: foreach (m[r]) m[r] = 6'b1_11111;
        endcase
        repeat (2 * L * K + K + L + 12) @(negedge clk);
        for (int r = 0; r < M; r++) begin
          cfg_we = 1'b1; cfg_row = 2'(r); cfg_data = m[r]; lut[r] = 16'(m[r]);
          @(negedge clk);
        end
        cfg_we = 1'b0;
        n_mode++;
      end else if (f % 2 == 1) begin
        repeat ($urandom_range(1, 4)) @(negedge clk);
        n_gap++;
      end else if (f > 0) n_b2b++;
      foreach (fr[c, l, k]) fr[c][l][k] = (f / 6 == 3) ? $urandom_range(200, 255) : $urandom_range(0, 255);
      // reference
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
    $display("mechanisms: matrix changes %0d, NN holds %0d, open switches %0d, clips %0d, back-to-back %0d, gapped %0d, banks in %0d/%0d out %0d/%0d",
             n_mode, n_hold, n_open, n_clip, n_b2b, n_gap, n_bank_in[0], n_bank_in[1], n_bank_out[0], n_bank_out[1]);
    begin
      int cnt [7];
      string nm [7];
      cnt = '{n_mode, n_hold, n_open, n_b2b, n_gap, n_bank_in[1], n_bank_out[1]};
      nm  = '{"matrix change", "NN hold", "open switch", "back-to-back frame",
              "gapped frame", "input bank 1", "output bank 1"};
      foreach (cnt[i]) begin
        checks++;
        if (cnt[i] == 0) begin failures++; $display("FAIL mechanism never seen: %s", nm[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
