// refocus_pkg -- types and constants shared by the plenoptic refocusing RTL.
//
// Every stream in the design carries a pix_t: a valid flag, a "first" flag
// that marks the first pixel of a line (row line or column line, depending on
// where the stream is), and an 8-bit grey value of one colour channel.
//
// The package also holds the three switch-state matrices worked out for a
// micro image size of M = 3: a = 0/3, 1/3 and 2/3. Each LUT row is packed as
// {we, s(w = TAPS-1) .. s(w = 0)} for a 5-tap filter. The 3-tap matrices of
// a = 0/3 and a = 1/3 sit on the last three taps (w = 2..4), so all three
// share the same latency. The write-enable column is this design's own
// encoding of the "we" switch: one pulse per micro image for the
// nearest-neighbour case a = 0/3, always on for the other two.
package refocus_pkg;

  parameter int unsigned PIX_W = 8;   // 8 bit per colour channel

  typedef struct packed {
    logic             valid;
    logic             first;
    logic [PIX_W-1:0] data;
  } pix_t;

  localparam pix_t PIX_IDLE = '{valid: 1'b0, first: 1'b0, data: '0};

  // LUT rows for TAPS = 5, M = 3, bit 5 = we, bits 4..0 = s(w=4..0).
  typedef logic [5:0] lut_row5_t;
  typedef lut_row5_t  lut3x5_t [3];

  // a = 0/3: identity on taps 2..4, we on the last row
  localparam lut3x5_t LUT_A0_M3 = '{6'b0_00100, 6'b0_01000, 6'b1_10000};
  // a = 1/3: switches always closed on taps 2..4, we every pixel
  localparam lut3x5_t LUT_A1_M3 = '{6'b1_11100, 6'b1_11100, 6'b1_11100};
  // a = 2/3: rows [0 0 1 1 1], [0 1 1 1 0], [1 1 1 0 0], column w = 0 leftmost
  localparam lut3x5_t LUT_A2_M3 = '{6'b1_11100, 6'b1_01110, 6'b1_00111};

endpackage
