// switch_lut -- switch-state look-up table and row sequencer.
//
// The switch-driven FIR is told for every pixel which of its TAPS switches
// are closed and whether its output write-enable switch is closed. These
// bits form a matrix s(a, w, p) with one column per switch w and M rows p;
// one row is used per pixel, starting again at row 0 after row M-1. This
// module stores the matrix and steps through it. Changing the refocusing
// parameter a means writing a new matrix through the cfg_* port.
//
// Row layout: {we, s(w = TAPS-1), ..., s(w = 0)}. Storing "we" as an extra
// column, restarting at row 0 on the first pixel of every line, and the
// reset contents (the a = 1/M matrix: the last M switches closed, we always
// on) are this design's choices; the paper only gives the matrices and the
// cyclic row order.
//
// Timing: step/first are sampled at a clock edge, and the row for that pixel
// is on sw/we after the edge, i.e. aligned with the registered output of
// stored_product_rom when both are fed in the same cycle.
module switch_lut #(
  parameter int unsigned TAPS = 5,
  parameter int unsigned M    = 3,
  localparam int unsigned PW  = (M > 1) ? $clog2(M) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // configuration write port
  input  logic            cfg_we,
  input  logic [PW-1:0]   cfg_row,
  input  logic [TAPS:0]   cfg_data,
  // sequencing
  input  logic            step,
  input  logic            first,
  output logic [TAPS-1:0] sw,
  output logic            we
);

  logic [TAPS:0] lut [M];
  logic [PW-1:0] p;       // next row to use
  logic [PW-1:0] p_use;   // row used by the pixel of this cycle

  // reset contents: a = 1/M, the last M taps closed, we on
  function automatic logic [TAPS:0] default_row();
    logic [TAPS:0] r;
    r = '0;
    r[TAPS] = 1'b1;
    for (int unsigned w = 0; w < TAPS; w++)
      if (w + M >= TAPS) r[w] = 1'b1;
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned r = 0; r < M; r++) lut[r] <= default_row();
    end else if (cfg_we && cfg_row < PW'(M)) begin
      lut[cfg_row] <= cfg_data;
    end
  end

  assign p_use = first ? '0 : p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p  <= '0;
      sw <= '0;
      we <= 1'b0;
    end else if (step) begin
      p        <= (p_use == PW'(M - 1)) ? '0 : p_use + 1'b1;
      {we, sw} <= lut[p_use];
    end
  end

endmodule
