// tb_texture_detect: feeds three frames of a generated image (flat patches
// of skin-like, dark, bright and other colours with noise, so every rule
// fires) as 3-line parallel columns, with random idle cycles and with a
// gap-free burst, and compares every output with a reference computed here:
// gray = (306 R + 601 G + 117 B + 512) >> 10, texture = 3x3 max - min > 40
// with edges replicated, OR dark (all < 80), OR (all < 230 and not
// R > G > B). Checks raster order, one output per input, and that in the
// gap-free frame outputs come one per clock. Counts how often each rule
// fired.
module tb_texture_detect;
  import face_pkg::*;
  localparam int W = 16, H = 10, TH = 40;
  logic clk = 0, rst_n = 0, in_valid = 0;
  rgb_col_t in_col;
  logic out_valid, out_tex;
  rgb_t out_rgb;
  int checks = 0, failures = 0;
  int n_tex = 0, n_dark = 0, n_hue = 0, n_clear = 0;
  rgb_t img [H][W];
  bit   exp_tex [H][W];
  int   ox, oy, n_out, first_out, last_out, cyc;

  texture_detect #(.WIDTH(W), .TEX_THRESH(TH)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int gray(rgb_t p);
    return (306 * int'(p.r) + 601 * int'(p.g) + 117 * int'(p.b) + 512) >>> 10;
  endfunction

  function automatic int clampi(int v, int lo, int hi);
    return v < lo ? lo : (v > hi ? hi : v);
  endfunction

  task automatic make_image();
    rgb_t pal [6] = '{'{200, 140, 110}, '{40, 30, 20}, '{240, 240, 240},
                      '{90, 160, 60},   '{180, 120, 90}, '{120, 130, 200}};
    int gmax, gmin, g;
    rgb_t base, c;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        base = pal[((x / 4) + 2 * (y / 3) + $urandom_range(0, 1)) % 6];
        c.r = 8'(clampi(int'(base.r) + int'($urandom_range(0, 6)) - 3, 0, 255));
        c.g = 8'(clampi(int'(base.g) + int'($urandom_range(0, 6)) - 3, 0, 255));
        c.b = 8'(clampi(int'(base.b) + int'($urandom_range(0, 6)) - 3, 0, 255));
        img[y][x] = c;
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        bit t, d, h;
        gmax = 0; gmin = 255;
        for (int dy = -1; dy <= 1; dy++)
          for (int dx = -1; dx <= 1; dx++) begin
            g = gray(img[clampi(y + dy, 0, H - 1)][clampi(x + dx, 0, W - 1)]);
            if (g > gmax) gmax = g;
            if (g < gmin) gmin = g;
          end
        c = img[y][x];
        t = (gmax - gmin) > TH;
        d = c.r < 80 && c.g < 80 && c.b < 80;
        h = c.r < 230 && c.g < 230 && c.b < 230 && !(c.r > c.g && c.g > c.b);
        exp_tex[y][x] = t | d | h;
        n_tex += int'(t); n_dark += int'(d); n_hue += int'(h); n_clear += int'(!(t | d | h));
      end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (oy >= H || out_rgb != img[oy][ox] || out_tex != exp_tex[oy][ox]) begin
        failures++;
        $display("pixel (%0d,%0d): got rgb %h tex %0d, exp rgb %h tex %0d", ox, oy,
                 out_rgb, out_tex, img[oy][ox], exp_tex[oy][ox]);
      end
      if (n_out == 0) first_out = cyc;
      last_out = cyc;
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
        in_col[0] = img[clampi(y - 1, 0, H - 1)][x];
        in_col[1] = img[y][x];
        in_col[2] = img[clampi(y + 1, 0, H - 1)][x];
        in_valid = 1;
      end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (n_out != W * H) begin failures++; $display("got %0d outputs, exp %0d", n_out, W * H); end
  endtask

  initial begin
    cyc = 0;
    in_col = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      make_image();
      send_frame(f != 1);
      if (f == 1) begin
        checks++;
        if (last_out - first_out != W * H - 1) begin
          failures++;
          $display("gap-free frame: outputs spread over %0d cycles", last_out - first_out + 1);
        end
      end
    end
    $display("rule counts: texture %0d dark %0d hue %0d clear %0d", n_tex, n_dark, n_hue, n_clear);
    checks++;
    if (n_tex == 0 || n_dark == 0 || n_hue == 0 || n_clear == 0) begin
      failures++; $display("a rule never fired");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
