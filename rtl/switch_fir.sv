// switch_fir -- switch-driven semi-systolic FIR filter (one refocusing line).
//
// The scaled pixel (h0 * E) is broadcast to TAPS processing elements. Each
// element has a switch s(w) on the broadcast net, an adder and a register;
// the adder of element w adds the broadcast value, if its switch is closed,
// to the register of element w-1, so the register chain accumulates the
// pixels picked by the switch pattern:
//
//     reg[0] <= s[0] ? x : 0
//     reg[w] <= reg[w-1] + (s[w] ? x : 0)
//
// After pixel n the last register holds sum over w of s_w(n-d) * x(n-d),
// d = TAPS-1-w, which is the refocused value E'_a. Which pixels are summed,
// and therefore the synthetic focus a, is decided only by the switch
// pattern. A final write-enable switch "we" copies the last register to the
// output register; with we open the output keeps its old value, which gives
// the nearest-neighbour repetition of a = 0/M.
//
// Departures from the original arrangement, all this design's own: one add
// per register per pixel clock on a single clock (no doubled pixel clock);
// the chain starts from zero on the first pixel of a line; sums above the
// pixel range saturate and raise out_clip.
//
// Timing: in_* and sw/we of one pixel arrive together; a pixel taken in at
// clock edge t is on out_* after edge t+1 (chain register, then output
// register). One output per
// input pixel, so line length is preserved.
module switch_fir #(
  parameter int unsigned PIX_W = 8,
  parameter int unsigned TAPS  = 5,
  parameter int unsigned SUM_W = PIX_W + $clog2(TAPS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic [PIX_W-1:0] in_data,
  input  logic [TAPS-1:0]  sw,
  input  logic             we,
  output logic             out_valid,
  output logic             out_first,
  output logic [PIX_W-1:0] out_data,
  output logic             out_clip
);

  localparam logic [SUM_W-1:0] MAXPIX = SUM_W'((1 << PIX_W) - 1);

  logic [SUM_W-1:0] chain [TAPS];
  logic             v1, f1, we1;

  // broadcast net, adders and the register chain
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned w = 0; w < TAPS; w++) chain[w] <= '0;
      v1  <= 1'b0;
      f1  <= 1'b0;
      we1 <= 1'b0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        f1  <= in_first;
        we1 <= we;
        for (int unsigned w = 0; w < TAPS; w++) begin
          logic [SUM_W-1:0] tap, prev;
          tap  = sw[w] ? SUM_W'(in_data) : '0;
          prev = (w == 0 || in_first) ? '0 : chain[(w == 0) ? 0 : w - 1];
          chain[w] <= prev + tap;
        end
      end
    end
  end

  // write-enable switch and output register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_data  <= '0;
      out_clip  <= 1'b0;
    end else begin
      out_valid <= v1;
      out_first <= v1 & f1;
      out_clip  <= 1'b0;
      if (v1 && we1) begin
        if (chain[TAPS-1] > MAXPIX) begin
          out_data <= PIX_W'(MAXPIX);
          out_clip <= 1'b1;
        end else begin
          out_data <= PIX_W'(chain[TAPS-1]);
        end
      end
    end
  end

endmodule
