// row_demux -- demultiplexer between one row and the column processors.
//
// Row ROW of the 2-D array, after its skew registers, carries column
// (count - ROW) mod K of the horizontally refocused image. This
// demultiplexer sends the pixel to that column processor and idles the
// other K-1 outputs, so every column processor receives the pixels of its
// image column from row 0, row 1, ... on consecutive clocks. On the way the
// first flag is rewritten: it now marks row 0, the start of a column line.
// Purely combinational.
module row_demux
  import refocus_pkg::*;
#(
  parameter int unsigned K   = 3,
  parameter int unsigned ROW = 0,
  localparam int unsigned CW = (K > 1) ? $clog2(K) : 1
) (
  input  logic [CW-1:0] count,
  input  pix_t          d,
  output pix_t          q [K]
);

  localparam int unsigned ROFS = ROW % K;

  logic [CW:0] sel;

  always_comb begin
    sel = {1'b0, count} + (CW+1)'(K - ROFS);
    if (sel >= (CW+1)'(K)) sel = sel - (CW+1)'(K);
    for (int unsigned c = 0; c < K; c++) begin
      q[c] = PIX_IDLE;
      if (d.valid && sel == (CW+1)'(c)) begin
        q[c].valid = 1'b1;
        q[c].first = (ROW == 0);
        q[c].data  = d.data;
      end
    end
  end

endmodule
