// morph_window: one binary erosion or dilation stage of the opening.
// The structuring element is the diamond of radius R (all offsets with
// |dx| + |dy| <= R; for R = 2 the 13-pixel element B of the paper's Fig. 2).
// Erosion (DILATE = 0) outputs the AND of the pixels under the element,
// dilation (DILATE = 1) their OR. Pixels outside the image count as 1 for
// erosion and 0 for dilation, so neither stage changes the image border by
// itself.
// Datapath: 2R one-bit line buffers (one WIDTH-entry array, 2R bits wide,
// read and rewritten in the same cycle) give a column of 2R+1 rows; a
// (2R+1)-column shift register holds the window. Each input pixel is a
// "step": the window result for the centre R columns to the left and R rows
// above the new pixel is output. The R rightmost centres of a row are
// finished from a copy of the window on the R cycles after the row's last
// step, slots in which the next row cannot produce an output. After the
// last pixel of a frame the stage steps R padding rows on its own
// (busy = 1 until its last output is out), one per clock; a pixel arriving then is dropped and sets the
// sticky `overrun`. So each frame needs R*WIDTH idle input cycles of
// vertical blanking. Output is registered; one output per input pixel, in
// raster order. The framing and padding rules are this design's choice.
module morph_window #(
  parameter int unsigned WIDTH  = 640,
  parameter int unsigned HEIGHT = 480,
  parameter int unsigned R      = 2,
  parameter bit          DILATE = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_bit,
  output logic out_valid,
  output logic out_bit,
  output logic busy,
  output logic overrun
);

  localparam int unsigned N  = 2 * R + 1;
  localparam int unsigned XW = $clog2(WIDTH);
  localparam int unsigned YW = $clog2(HEIGHT + R + 1);
  localparam logic        PAD = !DILATE;

  logic [2*R-1:0] lb [WIDTH];        // bit j: row sy-1-j at this column
  logic [XW-1:0]  sx;                // column of the next step
  logic [YW-1:0]  sy;                // row of the next step (>= HEIGHT: flush)
  logic [N-1:0]   win  [N-1];        // win[j]: column sx-1-j, bit k: row sy-2R+k
  logic [N-1:0]   tail [N-1];
  logic [$clog2(R+1)-1:0] tail_t;    // tail centres still to output (R..1)

  logic           step, flushing;
  logic           nb;
  logic [N-1:0]   colv;
  logic [N-1:0]   w [N];             // w[d+R]: column centre+d
  logic           emit, res;

  assign flushing = (sy >= YW'(HEIGHT));
  assign busy     = flushing || (tail_t != 0) || out_valid;
  assign step     = flushing || in_valid;

  always_comb begin
    int row;
    nb = flushing ? PAD : in_bit;
    // column at sx, rows sy-2R .. sy, rows outside the image padded
    for (int k = 0; k < N; k++) begin
      row = int'(sy) - 2 * int'(R) + k;
      if (k == N - 1) colv[k] = nb;
      else            colv[k] = lb[sx][N - 2 - k];
      if (row < 0 || row >= int'(HEIGHT)) colv[k] = PAD;
    end

    emit = 1'b0;
    for (int d = 0; d < N; d++) w[d] = {N{PAD}};
    if (tail_t != 0) begin
      // centre WIDTH-tail_t; column centre+d held in tail[tail_t-d'] (d' = d-R)
      emit = 1'b1;
      for (int d = 0; d < N; d++) begin
        if (d - int'(R) < int'(tail_t))
          w[d] = tail[int'(tail_t) - 1 - (d - int'(R))];
      end
    end else if (step && !(int'(sx) < int'(R)) && !(int'(sy) < int'(R))) begin
      emit = 1'b1;
      for (int d = 0; d < N; d++) begin
        if (int'(sx) - 2 * int'(R) + d >= 0)
          w[d] = (d == N - 1) ? colv : win[N - 2 - d];
      end
    end

    res = !DILATE;
    for (int d = 0; d < N; d++)
      for (int k = 0; k < N; k++)
        if ((d > int'(R) ? d - int'(R) : int'(R) - d) +
            (k > int'(R) ? k - int'(R) : int'(R) - k) <= int'(R))
          res = DILATE ? (res | w[d][k]) : (res & w[d][k]);
  end

  always_ff @(posedge clk) begin
    if (step) begin
      lb[sx]  <= {lb[sx][2*R-2:0], nb};
      win[0]  <= colv;
      for (int j = 1; j < N - 1; j++) win[j] <= win[j-1];
      if (sx == XW'(WIDTH - 1)) begin
        tail[0] <= colv;
        for (int j = 1; j < N - 1; j++) tail[j] <= win[j-1];
      end
    end
    out_bit <= res;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sx        <= '0;
      sy        <= '0;
      tail_t    <= '0;
      out_valid <= 1'b0;
      overrun   <= 1'b0;
    end else begin
      out_valid <= emit;
      if (flushing && in_valid) overrun <= 1'b1;
      if (step) begin
        if (sx == XW'(WIDTH - 1)) begin
          sx <= '0;
          sy <= (sy == YW'(HEIGHT + R - 1)) ? '0 : sy + 1'b1;
        end else begin
          sx <= sx + 1'b1;
        end
      end
      if (step && sx == XW'(WIDTH - 1) && !(int'(sy) < int'(R)))
        tail_t <= ($bits(tail_t))'(R);
      else if (tail_t != 0)
        tail_t <= tail_t - 1'b1;
    end
  end

endmodule
