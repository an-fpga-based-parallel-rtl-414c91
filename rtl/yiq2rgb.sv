// yiq2rgb: YIQ -> RGB conversion for the video output (the YIQ2RGB gamut
// conversion). The paper states the conversion but not its matrix; this
// block uses the numerical inverse of eq. (2):
//   R = Y + 0.955 I + 0.622 Q,  G = Y - 0.271 I - 0.648 Q,
//   B = Y - 1.107 I + 1.702 Q,
// with Q10 coefficients, rounding to nearest and clamping to 0..255.
// Stage 1 multiplies, stage 2 sums. Latency 2 cycles, one pixel per clock.
module yiq2rgb
  import face_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  yiq_t  in_yiq,
  output logic  out_valid,
  output rgb_t  out_rgb
);

  int signed prod [3][3];
  logic      v1;

  always_ff @(posedge clk) begin
    for (int r = 0; r < 3; r++) begin
      prod[r][0] <= RGB_C[r][0] * int'(in_yiq.y);
      prod[r][1] <= RGB_C[r][1] * int'(in_yiq.i);
      prod[r][2] <= RGB_C[r][2] * int'(in_yiq.q);
    end
  end

  always_ff @(posedge clk) begin
    out_rgb.r <= clamp_u8((prod[0][0] + prod[0][1] + prod[0][2] + 512) >>> 10);
    out_rgb.g <= clamp_u8((prod[1][0] + prod[1][1] + prod[1][2] + 512) >>> 10);
    out_rgb.b <= clamp_u8((prod[2][0] + prod[2][1] + prod[2][2] + 512) >>> 10);
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
