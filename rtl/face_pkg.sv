// face_pkg: types and constants shared by the skin-tone pipeline.
// Pixels travel as 8-bit RGB; the YIQ form keeps Y as an 8-bit unsigned
// value and I, Q as 9-bit two's-complement integers (eq. (2) on 8-bit RGB
// gives |I| <= 152 and |Q| <= 134). YCgCr components are 8-bit unsigned with
// the 16/128/128 offsets of eq. (1). The user ranges are Q15 fractions:
// -5898 / 32768 = -18 %, as in the paper's register example.
package face_pkg;

  typedef struct packed {
    logic [7:0] r;
    logic [7:0] g;
    logic [7:0] b;
  } rgb_t;

  typedef struct packed {
    logic        [7:0] y;
    logic signed [8:0] i;
    logic signed [8:0] q;
  } yiq_t;

  typedef struct packed {
    logic [7:0] y;
    logic [7:0] cg;
    logic [7:0] cr;
  } ycc_t;

  // One column of the 3-line parallel input: rows y-1, y, y+1.
  typedef rgb_t rgb_col_t [3];

  localparam int unsigned YIQ_W  = $bits(yiq_t);   // 26
  localparam int unsigned RANGE_FRAC = 15;         // Q15 range registers

  // eq. (2), coefficients x1024 (Q10), rows Y, I, Q.
  // The Q row uses +0.311 for B (printed -0.311, see rgb2yiq).
  localparam int signed YIQ_C [3][3] = '{'{ 306,  601,  117},
                                         '{ 610, -281, -330},
                                         '{ 217, -536,  318}};
  // eq. (1) divided by 255 for 8-bit RGB, x1024, rows Y, Cg, Cr.
  localparam int signed YCC_C [3][3] = '{'{ 263,  516,  100},
                                         '{-326,  450, -124},
                                         '{ 450, -377,  -73}};
  localparam int signed YCC_OFS [3] = '{16, 128, 128};
  // Numerical inverse of eq. (2), x1024, rows R, G, B; columns Y, I, Q.
  localparam int signed RGB_C [3][3] = '{'{1024,   978,   637},
                                         '{1024,  -278,  -663},
                                         '{1024, -1134,  1743}};

  function automatic logic [7:0] clamp_u8(input int signed v);
    if (v < 0)        return 8'd0;
    else if (v > 255) return 8'd255;
    else              return v[7:0];
  endfunction

  function automatic logic signed [8:0] clamp_s9(input int signed v);
    if (v < -256)     return -9'sd256;
    else if (v > 255) return 9'sd255;
    else              return v[8:0];
  endfunction

  // Gray value used by texture detection: Y row of eq. (2), rounded.
  function automatic logic [7:0] gray_of(input rgb_t p);
    int signed s;
    s = YIQ_C[0][0] * int'(p.r) + YIQ_C[0][1] * int'(p.g) + YIQ_C[0][2] * int'(p.b);
    return clamp_u8((s + 512) >>> 10);
  endfunction

endpackage
