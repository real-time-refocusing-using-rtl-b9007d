// row_buffer_out -- parallel-to-serial row buffer in on-chip memory.
//
// The 2-D array delivers its refocused frame one complete row per clock
// (K pixels side by side, first marking row 0). This buffer writes the rows
// into one of two memory banks; once a bank holds all L rows it is read out
// as one raster stream, row by row, one pixel per clock, with first on
// pixel 0 of the frame, while the next frame fills the other bank.
//
// Two banks and read-as-soon-as-full are this design's choices. Reading
// takes L*K clocks, the same time the serial input side needs to deliver a
// frame, so a bank is always free again before it is needed.
// Timing: if the last row is taken in at clock edge t, pixel 0 is on
// out_pix after edge t+1 and the last pixel after edge t+L*K.
module row_buffer_out
  import refocus_pkg::*;
#(
  parameter int unsigned L = 3,
  parameter int unsigned K = 3,
  localparam int unsigned RW = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned CW = (K > 1) ? $clog2(K) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  pix_t in_pix [K],
  output pix_t out_pix,
  output logic frame_ready    // a bank was filled in this clock
);

  logic [PIX_W-1:0] mem [K][2*L];

  logic          wbank, rbank;
  logic [RW-1:0] wrow, wrow_n, rrow;
  logic [CW-1:0] rcol;
  logic          rd_act, rd_v, rd_f, last_row;
  logic [PIX_W-1:0] q;

  always_comb begin
    wrow_n   = in_pix[0].first ? '0 : wrow;
    last_row = in_pix[0].valid && wrow_n == RW'(L - 1);
  end

  for (genvar c = 0; c < K; c++) begin : g_wr
    always_ff @(posedge clk)
      if (in_pix[0].valid) mem[c][wbank ? L + int'(wrow_n) : int'(wrow_n)] <= in_pix[c].data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank <= 1'b0;
      wrow  <= '0;
      rbank <= 1'b0;
      rrow  <= '0;
      rcol  <= '0;
      rd_act <= 1'b0;
      frame_ready <= 1'b0;
    end else begin
      frame_ready <= 1'b0;
      if (in_pix[0].valid)
        wrow <= (wrow_n == RW'(L - 1)) ? '0 : wrow_n + 1'b1;
      if (rd_act) begin
        if (rcol == CW'(K - 1)) begin
          rcol <= '0;
          if (rrow == RW'(L - 1)) rd_act <= 1'b0;
          else                    rrow   <= rrow + 1'b1;
        end else begin
          rcol <= rcol + 1'b1;
        end
      end
      if (last_row) begin
        wbank       <= ~wbank;
        rbank       <= wbank;
        rrow        <= '0;
        rcol        <= '0;
        rd_act      <= 1'b1;
        frame_ready <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_v <= 1'b0;
      rd_f <= 1'b0;
    end else begin
      rd_v <= rd_act;
      rd_f <= rd_act && rrow == '0 && rcol == '0;
    end
  end

  always_ff @(posedge clk) q <= mem[rcol][rbank ? L + int'(rrow) : int'(rrow)];

  assign out_pix = '{valid: rd_v, first: rd_f, data: q};

endmodule
