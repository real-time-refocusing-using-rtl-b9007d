// module_array_2d -- parallel 2-D refocusing array.
//
// A plenoptic frame of L rows by K columns enters as L parallel row streams,
// column 0 of every row in the same clock, one column per clock. Refocusing
// is separable, so it is done in two passes of the same 1-D processor:
//
//   1. L row processors refocus every row horizontally (E').
//   2. Row l is delayed by l clocks (skew registers) and passed to a
//      demultiplexer driven by a common pixel counter, which sends column k
//      of every row to column processor k. Column processor k thus receives
//      E'[k, 0], E'[k, 1], ... on consecutive clocks.
//   3. K column processors refocus every column vertically (E'').
//   4. Column c is delayed by K-1-c clocks so that each clock delivers one
//      complete output row, all K columns side by side.
//
// All processors share one switch-matrix write port, so the same synthetic
// focus a is used in both directions. The optional output skew registers of
// the original arrangement are included.
//
// Timing: each processor has three register stages (a pixel taken in at
// clock edge t leaves it after edge t+2). With column 0 of a frame taken in
// at edge 0, column k of row l reaches the column processors after edge
// 2 + k + l, and output row l is on out_pix after edge K + l + 4, all
// columns together. A new frame may follow the previous one back to back (period K
// clocks) or after at least L idle clocks; other spacings would let two
// frames meet in one column processor, which the assertion below flags.
// clip is high in any clock in which a processor saturated a sum.
module module_array_2d
  import refocus_pkg::*;
#(
  parameter int unsigned L    = 3,
  parameter int unsigned K    = 3,
  parameter int unsigned M    = 3,
  parameter int unsigned TAPS = 5,
  localparam int unsigned PW  = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned CW  = (K > 1) ? $clog2(K) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_we,
  input  logic [PW-1:0] cfg_row,
  input  logic [TAPS:0] cfg_data,
  input  pix_t          in_pix  [L],
  output pix_t          out_pix [K],
  output logic          clip
);

  pix_t          h_out  [L];
  pix_t          h_skew [L];
  pix_t          dmx    [L][K];
  pix_t          v_in   [K];
  pix_t          v_out  [K];
  logic [L-1:0]  h_clip;
  logic [K-1:0]  v_clip;
  logic [CW-1:0] count;

  // horizontal stage
  for (genvar l = 0; l < L; l++) begin : g_row
    processor_1d #(.M(M), .TAPS(TAPS)) u_hproc (
      .clk      (clk),
      .rst_n    (rst_n),
      .cfg_we   (cfg_we),
      .cfg_row  (cfg_row),
      .cfg_data (cfg_data),
      .in_pix   (in_pix[l]),
      .out_pix  (h_out[l]),
      .out_clip (h_clip[l])
    );

    skew_delay #(.DEPTH(l)) u_skew (
      .clk (clk),
      .rst_n (rst_n),
      .d   (h_out[l]),
      .q   (h_skew[l])
    );

    row_demux #(.K(K), .ROW(l)) u_demux (
      .count (count),
      .d     (h_skew[l]),
      .q     (dmx[l])
    );
  end

  pixel_counter #(.K(K)) u_counter (
    .clk   (clk),
    .rst_n (rst_n),
    .start (h_out[0].valid & h_out[0].first),
    .count (count)
  );

  // gather the demultiplexer outputs per column (one row drives at a time)
  always_comb begin
    for (int unsigned c = 0; c < K; c++) begin
      v_in[c] = PIX_IDLE;
      for (int unsigned l = 0; l < L; l++)
        if (dmx[l][c].valid) v_in[c] = dmx[l][c];
    end
  end

  // vertical stage
  for (genvar c = 0; c < K; c++) begin : g_col
    processor_1d #(.M(M), .TAPS(TAPS)) u_vproc (
      .clk      (clk),
      .rst_n    (rst_n),
      .cfg_we   (cfg_we),
      .cfg_row  (cfg_row),
      .cfg_data (cfg_data),
      .in_pix   (v_in[c]),
      .out_pix  (v_out[c]),
      .out_clip (v_clip[c])
    );

    skew_delay #(.DEPTH(K - 1 - c)) u_deskew (
      .clk (clk),
      .rst_n (rst_n),
      .d   (v_out[c]),
      .q   (out_pix[c])
    );
  end

  assign clip = |h_clip | |v_clip;

  // at most one row may feed a column processor in any clock
  for (genvar c = 0; c < K; c++) begin : g_chk
    logic [L-1:0] drv;
    always_comb
      for (int unsigned l = 0; l < L; l++) drv[l] = dmx[l][c].valid;
    a_one_row : assert property (@(posedge clk) disable iff (!rst_n) $onehot0(drv))
      else $error("two frames collide in column processor %0d", c);
  end

endmodule
