// face_detect_top: real-time skin detection and skin-tone adjustment.
// The pipeline of the paper's hardware architecture, one pixel per clock:
//   3-line video in -> texture_detect (3x3 gray gradient + colour rules)
//   -> rgb2yiq / rgb2ycgcr -> skin_detect (eq. (3) AND eq. (4) AND !texture)
//   -> morph_open (erosion + dilation, radius-2 diamond)
//   -> skin_tone_adjust (eq. (5), ranges from user_regs) -> yiq2rgb -> out.
// Y, I, Q of every pixel wait in yiq_buffer while its mask bit is in the
// opening; the opening emits exactly one bit per pixel in raster order, so
// a pop per opened bit keeps the two streams aligned.
// Interface: in_valid/in_col carry one column of rows y-1, y, y+1 of a
// WIDTH x HEIGHT frame in raster order of the centre row; frames are
// counted from reset. Between frames the input must stay idle for at least
// 2*RADIUS*WIDTH + 16 cycles while the opening flushes (busy = 1);
// otherwise `overrun` is set. The user registers are written through
// wr_en/wr_addr/wr_data and take effect at the next frame boundary of the
// adjuster. out_valid/out_rgb/out_skin give the adjusted pixel and its
// final skin mask, about 2*RADIUS lines after the pixel entered.
// Frame counting, blanking rule and flags are this design's choices.
module face_detect_top
  import face_pkg::*;
#(
  parameter int unsigned WIDTH      = 640,
  parameter int unsigned HEIGHT     = 480,
  parameter int unsigned TEX_THRESH = 40,
  parameter int unsigned BUF_DEPTH  = 4096
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  rgb_col_t           in_col,
  input  logic               wr_en,
  input  logic               wr_addr,
  input  logic signed [15:0] wr_data,
  output logic               out_valid,
  output rgb_t               out_rgb,
  output logic               out_skin,
  output logic               busy,
  output logic               overrun,
  output logic               buf_error
);

  localparam int unsigned NPIX = WIDTH * HEIGHT;

  // texture detection
  logic t_v, t_tex;
  rgb_t t_rgb;
  texture_detect #(.WIDTH(WIDTH), .TEX_THRESH(TEX_THRESH)) u_tex (
    .clk, .rst_n, .in_valid, .in_col,
    .out_valid(t_v), .out_rgb(t_rgb), .out_tex(t_tex)
  );

  // gamut conversion (both 2 cycles); texture bit delayed to match
  logic c_v, c_v2;
  yiq_t c_yiq;
  ycc_t c_ycc;
  logic [1:0] tex_d;
  rgb2yiq   u_yiq (.clk, .rst_n, .in_valid(t_v), .in_rgb(t_rgb), .out_valid(c_v),  .out_yiq(c_yiq));
  rgb2ycgcr u_ycc (.clk, .rst_n, .in_valid(t_v), .in_rgb(t_rgb), .out_valid(c_v2), .out_ycc(c_ycc));
  always_ff @(posedge clk) tex_d <= {tex_d[0], t_tex};

  // skin detection with the 3-input AND
  logic s_v, s_iq, s_cgcr, s_skin;
  skin_detect u_skin (
    .clk, .rst_n, .in_valid(c_v), .in_ycc(c_ycc), .in_yiq(c_yiq), .in_tex(tex_d[1]),
    .out_valid(s_v), .out_iq_skin(s_iq), .out_cgcr_skin(s_cgcr), .out_skin(s_skin)
  );

  // morphological opening
  logic m_v, m_bit;
  morph_open #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .RADIUS(2)) u_open (
    .clk, .rst_n, .in_valid(s_v), .in_bit(s_skin),
    .out_valid(m_v), .out_bit(m_bit), .busy, .overrun
  );

  // YIQ data buffer
  logic [YIQ_W-1:0] b_dout;
  logic b_empty, b_full, b_ovf, b_unf;
  logic [$clog2(BUF_DEPTH):0] b_level;
  yiq_buffer #(.WIDTH(YIQ_W), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n, .push(c_v), .din(c_yiq), .pop(m_v), .dout(b_dout),
    .empty(b_empty), .full(b_full), .overflow(b_ovf), .underflow(b_unf), .level(b_level)
  );
  assign buf_error = b_ovf | b_unf;

  // user registers: new values are applied while the adjuster is between frames
  logic [$clog2(NPIX)-1:0] a_cnt;
  logic signed [15:0] i_range, q_range;
  logic regs_pending;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    a_cnt <= '0;
    else if (m_v)  a_cnt <= (a_cnt == ($bits(a_cnt))'(NPIX - 1)) ? '0 : a_cnt + 1'b1;
  end
  user_regs u_regs (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data,
    .apply(a_cnt == '0 && !m_v),
    .i_range, .q_range, .pending(regs_pending)
  );

  // skin tone adjusting and conversion back to RGB
  logic a_v, a_skin;
  yiq_t a_yiq;
  skin_tone_adjust u_adj (
    .clk, .rst_n, .in_valid(m_v), .in_yiq(yiq_t'(b_dout)), .in_skin(m_bit),
    .i_range, .q_range, .out_valid(a_v), .out_yiq(a_yiq), .out_skin(a_skin)
  );
  logic [1:0] skin_d;
  yiq2rgb u_out (.clk, .rst_n, .in_valid(a_v), .in_yiq(a_yiq), .out_valid, .out_rgb);
  always_ff @(posedge clk) skin_d <= {skin_d[0], a_skin};
  assign out_skin = skin_d[1];

  // the two converters run in lock step; the buffer never over- or underruns
  a_conv_lockstep: assert property (@(posedge clk) disable iff (!rst_n) c_v == c_v2);
  a_buf_ok:        assert property (@(posedge clk) disable iff (!rst_n) !(c_v && b_full) && !(m_v && b_empty));

endmodule
