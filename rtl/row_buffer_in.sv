// row_buffer_in -- serial-to-parallel row buffer in on-chip memory.
//
// The 2-D array wants all L rows of a frame side by side, column 0 of every
// row in the same clock. A camera delivers the frame as one raster stream.
// This buffer writes the raster stream (in_pix.first marks pixel 0 of a
// frame) into one of two memory banks, row by row; as soon as a bank holds
// a complete L x K frame it is read out as L parallel streams, one column per
// clock, while the next frame is written into the other bank. On the output
// side first marks column 0 of every row.
//
// Two banks and the read-as-soon-as-full policy are this design's choices.
// Timing: if the last pixel of a frame is taken in at clock edge t, column 0
// is on out_pix after edge t+1 and column K-1 after edge t+K. Reading K columns always ends
// before the next frame (L*K pixels) has been written.
module row_buffer_in
  import refocus_pkg::*;
#(
  parameter int unsigned L = 3,
  parameter int unsigned K = 3,
  localparam int unsigned RW = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned CW = (K > 1) ? $clog2(K) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  pix_t in_pix,
  output pix_t out_pix [L],
  output logic frame_ready   // a bank was filled in this clock
);

  logic [PIX_W-1:0] mem [L][2*K];

  logic          wbank, rbank;
  logic [RW-1:0] wrow;
  logic [CW-1:0] wcol, rcol;
  logic          rd_act, rd_v, rd_f;
  logic [RW-1:0] wrow_n;
  logic [CW-1:0] wcol_n;
  logic          last_px;

  // write address of the pixel in this clock
  always_comb begin
    wrow_n = in_pix.first ? '0 : wrow;
    wcol_n = in_pix.first ? '0 : wcol;
    last_px = in_pix.valid && wrow_n == RW'(L - 1) && wcol_n == CW'(K - 1);
  end

  always_ff @(posedge clk) begin
    if (in_pix.valid) mem[wrow_n][wbank ? K + int'(wcol_n) : int'(wcol_n)] <= in_pix.data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank <= 1'b0;
      wrow  <= '0;
      wcol  <= '0;
      rbank <= 1'b0;
      rcol  <= '0;
      rd_act <= 1'b0;
      frame_ready <= 1'b0;
    end else begin
      frame_ready <= 1'b0;
      if (in_pix.valid) begin
        if (wcol_n == CW'(K - 1)) begin
          wcol <= '0;
          wrow <= (wrow_n == RW'(L - 1)) ? '0 : wrow_n + 1'b1;
        end else begin
          wcol <= wcol_n + 1'b1;
          wrow <= wrow_n;
        end
        if (last_px) begin
          wbank       <= ~wbank;
          rbank       <= wbank;
          rcol        <= '0;
          rd_act      <= 1'b1;
          frame_ready <= 1'b1;
        end
      end
      if (rd_act && !last_px) begin
        if (rcol == CW'(K - 1)) rd_act <= 1'b0;
        else                    rcol   <= rcol + 1'b1;
      end
    end
  end

  // registered parallel read of one column of all rows
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_v <= 1'b0;
      rd_f <= 1'b0;
    end else begin
      rd_v <= rd_act;
      rd_f <= rd_act && rcol == '0;
    end
  end

  for (genvar l = 0; l < L; l++) begin : g_rd
    logic [PIX_W-1:0] q;
    always_ff @(posedge clk) q <= mem[l][rbank ? K + int'(rcol) : int'(rcol)];
    assign out_pix[l] = '{valid: rd_v, first: rd_f, data: q};
  end

endmodule
