// refocus_ref_pkg -- reference arithmetic for the refocusing testbenches.
//
// Written independently of the RTL: the 1/M scaling uses real arithmetic
// and rounding to nearest, and the filter is evaluated in direct form, i.e.
// output n = sum over delays d of s(w = TAPS-1-d, row p(n-d)) * x(n-d), with
// p(n) = n mod M counted from the start of the line. The RTL instead
// accumulates in a transposed register chain.
package refocus_ref_pkg;

  typedef int int_q [$];

  function automatic int ref_prod(int v, int m);
    return int'($floor(real'(v) / real'(m) + 0.5));
  endfunction

  // one line through a 1-D processor; hold is the output register value
  // left over from the previous line of the same processor
  // m: rows of the matrix (the micro image size), scale: divisor of the
  // stored product (m in the design, 1 to feed pre-scaled values)
  function automatic int_q ref_line(int_q x, logic [15:0] lut [], int m,
                                    int taps, int scale, inout int hold);
    int_q y;
    for (int n = 0; n < x.size(); n++) begin
      logic [15:0] row;
      row = lut[n % m];
      if (row[taps]) begin
        int s;
        s = 0;
        for (int d = 0; d < taps; d++) begin
          if (n - d >= 0) begin
            logic [15:0] r2;
            r2 = lut[(n - d) % m];
            if (r2[taps - 1 - d]) s += ref_prod(x[n - d], scale);
          end
        end
        hold = (s > 255) ? 255 : s;
      end
      y.push_back(hold);
    end
    return y;
  endfunction

  // switch matrices given as in the text: rows p, columns w = 0 .. cols-1,
  // placed on the last 'cols' taps of a 'taps'-tap filter
  function automatic logic [15:0] mk_row(string bits, int taps, bit we);
    logic [15:0] r;
    int cols;
    cols = bits.len();
    r = '0;
    for (int w = 0; w < cols; w++)
      if (bits[w] == "1") r[taps - cols + w] = 1'b1;
    r[taps] = we;
    return r;
  endfunction

endpackage
