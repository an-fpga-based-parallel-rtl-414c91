// skin_tone_adjust: user-configurable skin-tone shift, eq. (5).
// For a pixel the opened mask marks as skin:
//   I_out = I + I * I_range,  Q_out = Q + Q * Q_range
// with I_range, Q_range Q15 fractions (-32768..32767 = -100 %..+100 %).
// The product is rounded to nearest (add 2^14, arithmetic shift by 15) and
// the sum saturated to the 9-bit signed I/Q range; Y is never changed.
// Non-skin pixels pass unchanged. One register stage (latency 1 cycle).
// Rounding and saturation are this design's choice.
module skin_tone_adjust
  import face_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  yiq_t               in_yiq,
  input  logic               in_skin,
  input  logic signed [15:0] i_range,
  input  logic signed [15:0] q_range,
  output logic               out_valid,
  output yiq_t               out_yiq,
  output logic               out_skin
);

  yiq_t adj;

  always_comb begin
    int signed di, dq;
    di = (int'(in_yiq.i) * int'(i_range) + (1 << (RANGE_FRAC - 1))) >>> RANGE_FRAC;
    dq = (int'(in_yiq.q) * int'(q_range) + (1 << (RANGE_FRAC - 1))) >>> RANGE_FRAC;
    adj   = in_yiq;
    if (in_skin) begin
      adj.i = clamp_s9(int'(in_yiq.i) + di);
      adj.q = clamp_s9(int'(in_yiq.q) + dq);
    end
  end

  always_ff @(posedge clk) begin
    out_yiq  <= adj;
    out_skin <= in_skin;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
