// texture_detect: binary texture and colour-condition filter.
// Input is the paper's 3-line parallel video: each beat carries one column
// of three pixels, rows y-1, y and y+1 (the source repeats the edge row at
// the top and bottom of the image). Each pixel is turned into a gray value
// (the Y row of eq. (2)) and a 3-column window of gray values is kept. The
// morphological gradient of the centre pixel, max minus min over the 3x3
// square, is compared with TEX_THRESH. The centre pixel is also tested for
// the two colour conditions of the paper: dark (R, G and B all below
// DARK_LIMIT) and, when R, G and B are all below BRIGHT_LIMIT, failing
// R > G > B. The output bit is the OR of texture, dark and the second
// condition: a 1 marks a pixel that cannot be skin.
// Timing: the centre of column x-1 is decided when column x arrives; the
// last column of a row (right edge replicated) is decided on the cycle after
// it arrives, a slot the next row's first column never uses. Outputs are
// registered, so each input column gives exactly one output pixel, in
// raster order, 1 or 2 cycles later. The left edge is replicated too.
// Threshold value, gray formula and edge handling are this design's choice.
module texture_detect
  import face_pkg::*;
#(
  parameter int unsigned WIDTH        = 640,
  parameter int unsigned TEX_THRESH   = 40,
  parameter int unsigned DARK_LIMIT   = 80,
  parameter int unsigned BRIGHT_LIMIT = 230
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  rgb_col_t in_col,
  output logic     out_valid,
  output rgb_t     out_rgb,
  output logic     out_tex
);

  localparam int unsigned XW = $clog2(WIDTH);

  logic [XW-1:0] x;                  // column of the next input beat
  logic [7:0]    g0 [3], g1 [3];     // gray columns x-1 and x-2 (after shift)
  rgb_t          c0;                 // centre-row pixel of newest column
  logic          tail_pending;       // right-edge pixel still to be decided

  logic [7:0]    gnew [3];
  logic [7:0]    wl [3], wc [3], wr [3];
  logic          emit;
  logic [7:0]    gmax, gmin;
  logic          tex_bit, dark, hue_bad;

  always_comb begin
    for (int k = 0; k < 3; k++) gnew[k] = gray_of(in_col[k]);
    emit = 1'b0;
    for (int k = 0; k < 3; k++) begin
      wl[k] = g1[k];
      wc[k] = g0[k];
      wr[k] = gnew[k];
    end
    if (tail_pending) begin
      emit = 1'b1;
      for (int k = 0; k < 3; k++) wr[k] = g0[k];
    end else if (in_valid && x != 0) begin
      emit = 1'b1;
      if (x == XW'(1)) for (int k = 0; k < 3; k++) wl[k] = g0[k];
    end
    gmax = 8'd0;
    gmin = 8'd255;
    for (int k = 0; k < 3; k++) begin
      if (wl[k] > gmax) gmax = wl[k];
      if (wc[k] > gmax) gmax = wc[k];
      if (wr[k] > gmax) gmax = wr[k];
      if (wl[k] < gmin) gmin = wl[k];
      if (wc[k] < gmin) gmin = wc[k];
      if (wr[k] < gmin) gmin = wr[k];
    end
    tex_bit = (32'(gmax - gmin) > TEX_THRESH);
    dark    = (32'(c0.r) < DARK_LIMIT) && (32'(c0.g) < DARK_LIMIT) && (32'(c0.b) < DARK_LIMIT);
    hue_bad = (32'(c0.r) < BRIGHT_LIMIT) && (32'(c0.g) < BRIGHT_LIMIT) &&
              (32'(c0.b) < BRIGHT_LIMIT) && !((c0.r > c0.g) && (c0.g > c0.b));
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      g0 <= gnew;
      g1 <= g0;
      c0 <= in_col[1];
    end
    out_rgb <= c0;
    out_tex <= tex_bit | dark | hue_bad;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x            <= '0;
      tail_pending <= 1'b0;
      out_valid    <= 1'b0;
    end else begin
      out_valid    <= emit;
      tail_pending <= in_valid && (x == XW'(WIDTH - 1));
      if (in_valid) x <= (x == XW'(WIDTH - 1)) ? '0 : x + 1'b1;
    end
  end

endmodule
