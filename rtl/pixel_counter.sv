// pixel_counter -- the counter that drives the row demultiplexers.
//
// Gives, in every clock, the column index k of the pixel that row 0 of the
// horizontal stage presents to its demultiplexer. It restarts at 0 in the
// cycle in which the first pixel of a frame leaves row 0 (start, seen
// combinationally so that this very pixel is routed with count 0), then
// counts modulo K. Because row l is skewed by l clocks, row l then holds
// column (count - l) mod K. Frames that follow each other back to back (one
// every K clocks) hit start exactly when the count wraps, so the count is
// continuous.
module pixel_counter #(
  parameter int unsigned K  = 3,
  localparam int unsigned CW = (K > 1) ? $clog2(K) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic [CW-1:0] count
);

  logic [CW-1:0] cnt_q;

  assign count = start ? '0 : cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt_q <= '0;
    else        cnt_q <= (count == CW'(K - 1)) ? '0 : count + 1'b1;
  end

endmodule
