// rgb2yiq: RGB -> YIQ conversion of eq. (2) (the RGB2YIQ half of the input
// gamut conversion).
// Stage 1 forms the nine products with Q10 integer coefficients, stage 2
// sums, rounds to the nearest integer and clamps Y to 0..255 and I, Q to the
// 9-bit signed range. Latency 2 cycles, one pixel per clock; `in_valid` is
// carried alongside the data.
// The paper prints the B coefficient of Q as -0.311; with that sign a gray
// pixel would not have Q = 0, which contradicts the paper's own remark that
// YIQ separates gray from colour, so +0.311 (the usual YIQ value) is used.
// Word lengths and rounding are this design's choice.
module rgb2yiq
  import face_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  rgb_t  in_rgb,
  output logic  out_valid,
  output yiq_t  out_yiq
);

  int signed prod [3][3];
  logic      v1;

  always_ff @(posedge clk) begin
    for (int r = 0; r < 3; r++) begin
      prod[r][0] <= YIQ_C[r][0] * int'(in_rgb.r);
      prod[r][1] <= YIQ_C[r][1] * int'(in_rgb.g);
      prod[r][2] <= YIQ_C[r][2] * int'(in_rgb.b);
    end
  end

  always_ff @(posedge clk) begin
    out_yiq.y <= clamp_u8 ((prod[0][0] + prod[0][1] + prod[0][2] + 512) >>> 10);
    out_yiq.i <= clamp_s9 ((prod[1][0] + prod[1][1] + prod[1][2] + 512) >>> 10);
    out_yiq.q <= clamp_s9 ((prod[2][0] + prod[2][1] + prod[2][2] + 512) >>> 10);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

endmodule
