// refocus_top -- real-time refocusing pipeline for a standard plenoptic camera.
//
// Takes calibrated plenoptic frames (every micro image M x M pixels, frame
// L rows by K columns, CHANNELS colour channels of 8 bit) as a serial raster
// stream and returns the refocused frame, at the same resolution, as a
// serial raster stream. Per colour channel:
//
//   row_buffer_in  -> L parallel row streams
//   module_array_2d -> horizontal then vertical switch-driven FIR refocusing
//   row_buffer_out -> serial raster stream
//
// The synthetic focus a is chosen by writing the switch matrix (M rows of
// TAPS switch bits plus a write-enable bit) through cfg_*; after reset the
// matrix for a = 1/M is loaded. Write it between frames: a frame that is
// inside the array while the matrix changes is refocused with a mixture.
//
// The HDMI receiver and transmitter, the off-chip frame memory and the
// clock PLL of a complete camera system are outside this module: in_* and
// out_* are where decoded video enters and leaves.
//
// Timing: one pixel per clock per channel in and out, no back-pressure.
// If the last pixel of a frame is taken in at clock edge t, pixel 0 of the
// refocused frame is on out_* after edge t + K + L + 7 (input buffer 2,
// array K + L + 3 from its first column to its last row, output buffer 2),
// and the frame then streams out in L*K clocks.
// frame_done pulses when a refocused frame is complete in the output buffer;
// clip reports a saturated sum in any processor.
module refocus_top
  import refocus_pkg::*;
#(
  parameter int unsigned CHANNELS = 3,
  parameter int unsigned L        = 3,
  parameter int unsigned K        = 3,
  parameter int unsigned M        = 3,
  parameter int unsigned TAPS     = 5,
  localparam int unsigned PW      = (M > 1) ? $clog2(M) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // switch matrix configuration
  input  logic                          cfg_we,
  input  logic [PW-1:0]                 cfg_row,
  input  logic [TAPS:0]                 cfg_data,
  // serial raster input, in_first on pixel 0 of a frame
  input  logic                          in_valid,
  input  logic                          in_first,
  input  logic [CHANNELS-1:0][PIX_W-1:0] in_data,
  // serial raster output
  output logic                          out_valid,
  output logic                          out_first,
  output logic [CHANNELS-1:0][PIX_W-1:0] out_data,
  output logic                          frame_done,
  output logic                          clip
);

  logic [CHANNELS-1:0] ch_valid, ch_first, ch_done, ch_clip;

  for (genvar ch = 0; ch < CHANNELS; ch++) begin : g_ch
    pix_t sin;
    pix_t rows [L];
    pix_t cols [K];
    pix_t sout;
    logic in_ready_unused;

    assign sin = '{valid: in_valid, first: in_first, data: in_data[ch]};

    row_buffer_in #(.L(L), .K(K)) u_rbin (
      .clk         (clk),
      .rst_n       (rst_n),
      .in_pix      (sin),
      .out_pix     (rows),
      .frame_ready (in_ready_unused)
    );

    module_array_2d #(.L(L), .K(K), .M(M), .TAPS(TAPS)) u_array (
      .clk      (clk),
      .rst_n    (rst_n),
      .cfg_we   (cfg_we),
      .cfg_row  (cfg_row),
      .cfg_data (cfg_data),
      .in_pix   (rows),
      .out_pix  (cols),
      .clip     (ch_clip[ch])
    );

    row_buffer_out #(.L(L), .K(K)) u_rbout (
      .clk         (clk),
      .rst_n       (rst_n),
      .in_pix      (cols),
      .out_pix     (sout),
      .frame_ready (ch_done[ch])
    );

    assign ch_valid[ch] = sout.valid;
    assign ch_first[ch] = sout.first;
    assign out_data[ch] = sout.data;
  end

  // all channels run in lock step; channel 0 provides the stream flags
  assign out_valid  = ch_valid[0];
  assign out_first  = ch_first[0];
  assign frame_done = ch_done[0];
  assign clip       = |ch_clip;

endmodule
