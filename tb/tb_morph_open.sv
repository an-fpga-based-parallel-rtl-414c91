// tb_morph_open: streams four frames of a random blob image through a small
// morph_open (12 x 9) and compares every output bit with an opening
// computed here: erosion by the radius-2 diamond (outside pixels = 1), then
// dilation by it (outside pixels = 0). Frames use random idle cycles, one
// is gap-free; between frames the input waits for `busy` to drop. Checks
// one output per input in raster order, that the end-of-frame flush took
// place (busy seen) and that opening removed and kept pixels. Finally a
// pixel sent during a flush must set `overrun`.
// One frame is the worked example of the paper's Fig. 2: the 9 x 9 original
// image of Fig. 2(b) (columns 9-11 zero) must come out as the opening of
// Fig. 2(d).
module tb_morph_open;
  localparam int W = 12, H = 9, R = 2;
  logic clk = 0, rst_n = 0, in_valid = 0, in_bit = 0;
  logic out_valid, out_bit, busy, overrun;
  int checks = 0, failures = 0;
  bit img [H][W], ero [H][W], opn [H][W];
  int ox, oy, n_out, n_removed = 0, n_kept = 0, busy_cycles = 0;

  morph_open #(.WIDTH(W), .HEIGHT(H), .RADIUS(R)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (busy) busy_cycles++;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit in_b(int dx, int dy);
    return (dx < 0 ? -dx : dx) + (dy < 0 ? -dy : dy) <= R;
  endfunction

  // Fig. 2(b) original image and Fig. 2(d) opening result, row by row,
  // leftmost character = column 0
  string fig_b [9] = '{"000001000", "000001110", "000000111", "001110100", "011111110",
                       "011111111", "111111110", "011111100", "001111000"};
  string fig_d [9] = '{"000000000", "000000000", "000000000", "000110100", "001111110",
                       "011111111", "111111110", "011111100", "001111000"};
  bit use_fig = 0;

  task automatic make_image(int density);
    bit v;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        if (use_fig) img[y][x] = (x < 9) && (fig_b[y][x] == "1");
        else         img[y][x] = ($urandom_range(0, 99) < density);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        v = 1;
        for (int dy = -R; dy <= R; dy++)
          for (int dx = -R; dx <= R; dx++)
            if (in_b(dx, dy) && y + dy >= 0 && y + dy < H && x + dx >= 0 && x + dx < W)
              v &= img[y + dy][x + dx];
        ero[y][x] = v;
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        v = 0;
        for (int dy = -R; dy <= R; dy++)
          for (int dx = -R; dx <= R; dx++)
            if (in_b(dx, dy) && y + dy >= 0 && y + dy < H && x + dx >= 0 && x + dx < W)
              v |= ero[y + dy][x + dx];
        opn[y][x] = v;
        if (img[y][x] && !v) n_removed++;
        if (img[y][x] && v)  n_kept++;
      end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (oy >= H || out_bit != opn[oy][ox]) begin
        failures++;
        $display("pixel (%0d,%0d): got %0d exp %0d", ox, oy, out_bit, oy < H ? opn[oy][ox] : 0);
      end
      n_out++;
      if (ox == W - 1) begin ox = 0; oy++; end else ox++;
    end
  end

  task automatic send_frame(bit gaps);
    ox = 0; oy = 0; n_out = 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        @(negedge clk);
        while (gaps && $urandom_range(0, 3) == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_bit = img[y][x];
        in_valid = 1;
      end
    @(negedge clk);
    in_valid = 0;
    while (busy) @(negedge clk);
    repeat (R + 3) @(negedge clk);
    checks++;
    if (n_out != W * H) begin failures++; $display("got %0d outputs, exp %0d", n_out, W * H); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 4; f++) begin
      make_image(f == 3 ? 100 : 60 + 10 * f);
      send_frame(f != 2);
    end
    // the paper's Fig. 2 example
    use_fig = 1;
    make_image(0);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        checks++;
        if (opn[y][x] != ((x < 9) && (fig_d[y][x] == "1"))) begin
          failures++; $display("reference differs from Fig. 2(d) at (%0d,%0d)", x, y);
        end
      end
    send_frame(1);
    use_fig = 0;
    $display("removed %0d kept %0d busy cycles %0d", n_removed, n_kept, busy_cycles);
    checks++;
    if (n_removed == 0 || n_kept == 0 || busy_cycles == 0 || overrun) begin
      failures++; $display("mechanism not exercised or spurious overrun");
    end
    // a pixel in the flush window must be flagged
    make_image(50);
    ox = 0; oy = 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        @(negedge clk);
        in_bit = img[y][x]; in_valid = 1;
      end
    @(negedge clk);
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!overrun) begin failures++; $display("overrun not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
