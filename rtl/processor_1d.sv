// processor_1d -- one 1-D semi-systolic refocusing processor.
//
// Refocuses one serial line of pixels (a sensor row, or an image column in
// the vertical stage) for the synthetic focus chosen by the switch matrix:
// stored_product_rom scales each pixel by 1/M, switch_lut supplies the
// switch row for the pixel, and switch_fir adds the selected pixels. The
// output line has as many pixels as the input line.
//
// Interface: in_pix/out_pix are pix_t streams; in_pix.first marks the
// first pixel of a line and must coincide with the first pixel of a micro
// image. cfg_* writes one row of the switch matrix (see switch_lut).
// Timing: three register stages (ROM read, adder chain, output register):
// a pixel taken in at clock edge t is on out_pix after edge t+2. One pixel
// per clock, no stalls.
module processor_1d
  import refocus_pkg::*;
#(
  parameter int unsigned M    = 3,
  parameter int unsigned TAPS = 5,
  localparam int unsigned PW  = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_we,
  input  logic [PW-1:0] cfg_row,
  input  logic [TAPS:0] cfg_data,
  input  pix_t          in_pix,
  output pix_t          out_pix,
  output logic          out_clip
);

  logic [PIX_W-1:0] prod;
  logic [TAPS-1:0]  sw;
  logic             we;
  logic             v1, f1;

  stored_product_rom #(.PIX_W(PIX_W), .M(M)) u_rom (
    .clk  (clk),
    .addr (in_pix.data),
    .data (prod)
  );

  switch_lut #(.TAPS(TAPS), .M(M)) u_lut (
    .clk      (clk),
    .rst_n    (rst_n),
    .cfg_we   (cfg_we),
    .cfg_row  (cfg_row),
    .cfg_data (cfg_data),
    .step     (in_pix.valid),
    .first    (in_pix.first),
    .sw       (sw),
    .we       (we)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      f1 <= 1'b0;
    end else begin
      v1 <= in_pix.valid;
      f1 <= in_pix.valid & in_pix.first;
    end
  end

  switch_fir #(.PIX_W(PIX_W), .TAPS(TAPS)) u_fir (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (v1),
    .in_first  (f1),
    .in_data   (prod),
    .sw        (sw),
    .we        (we),
    .out_valid (out_pix.valid),
    .out_first (out_pix.first),
    .out_data  (out_pix.data),
    .out_clip  (out_clip)
  );

endmodule
