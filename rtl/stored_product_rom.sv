// stored_product_rom -- the h0 = 1/M "multiplier" of the refocusing filter.
//
// Each pixel entering a 1-D processor is first scaled by h0 = 1/M, so that
// the sum of the M pixels of one ray bundle stays inside the pixel range.
// With 8-bit pixels there are only 256 possible products, so the product is
// a table look-up instead of a multiplier: a read-only memory with one
// entry per pixel value, entry v = round(v / M) = (v + M/2) / M (integer
// division, halves rounded up). The table is filled at elaboration from
// that formula. Rounding to nearest matches the worked numbers of the
// original timing diagrams (16 -> 5, 50 -> 17, 101 -> 34 for M = 3).
//
// Interface: addr is the pixel value, data the scaled value.
// Timing: synchronous read, data is valid one clock after addr (the single
// "product" step of the filter pipeline). No reset: a ROM needs none.
module stored_product_rom #(
  parameter int unsigned PIX_W = 8,
  parameter int unsigned M     = 3
) (
  input  logic             clk,
  input  logic [PIX_W-1:0] addr,
  output logic [PIX_W-1:0] data
);

  localparam int unsigned DEPTH = 1 << PIX_W;

  logic [PIX_W-1:0] rom [DEPTH];

  initial begin
    for (int unsigned v = 0; v < DEPTH; v++)
      rom[v] = PIX_W'((v + M / 2) / M);
  end

  always_ff @(posedge clk)
    data <= rom[addr];

endmodule
