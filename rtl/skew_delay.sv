// skew_delay -- "skewed registers" of the 2-D module array.
//
// Delays a pix_t stream by DEPTH clocks. Row l of the array is delayed by
// l clocks before the demultiplexers, so that column k of row l reaches the
// column processors one clock after column k of row l-1; behind the column
// processors, column c is delayed by K-1-c clocks so that all columns of one
// output row leave together. DEPTH = 0 is a plain wire.
// Reset clears the valid flags of the stages.
module skew_delay
  import refocus_pkg::*;
#(
  parameter int unsigned DEPTH = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  pix_t d,
  output pix_t q
);

  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    pix_t stage [DEPTH];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int unsigned i = 0; i < DEPTH; i++) stage[i] <= PIX_IDLE;
      end else begin
        stage[0] <= d;
        for (int unsigned i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
      end
    end
    assign q = stage[DEPTH-1];
  end

endmodule
