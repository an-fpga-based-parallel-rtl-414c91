// rgb2ycgcr: RGB -> YCgCr conversion of eq. (1) (the RGB2YCC half of the
// input gamut conversion).
// The paper's matrix is written for RGB in [0,1]; for 8-bit RGB every
// coefficient is divided by 255 and rounded to Q10. Stage 1 multiplies,
// stage 2 sums, rounds, adds the 16/128/128 offsets and clamps to 0..255.
// Latency 2 cycles, one pixel per clock. Word lengths are this design's
// choice.
module rgb2ycgcr
  import face_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  rgb_t  in_rgb,
  output logic  out_valid,
  output ycc_t  out_ycc
);

  int signed prod [3][3];
  logic      v1;

  always_ff @(posedge clk) begin
    for (int r = 0; r < 3; r++) begin
      prod[r][0] <= YCC_C[r][0] * int'(in_rgb.r);
      prod[r][1] <= YCC_C[r][1] * int'(in_rgb.g);
      prod[r][2] <= YCC_C[r][2] * int'(in_rgb.b);
    end
  end

  always_ff @(posedge clk) begin
    out_ycc.y  <= clamp_u8(YCC_OFS[0] + ((prod[0][0] + prod[0][1] + prod[0][2] + 512) >>> 10));
    out_ycc.cg <= clamp_u8(YCC_OFS[1] + ((prod[1][0] + prod[1][1] + prod[1][2] + 512) >>> 10));
    out_ycc.cr <= clamp_u8(YCC_OFS[2] + ((prod[2][0] + prod[2][1] + prod[2][2] + 512) >>> 10));
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
