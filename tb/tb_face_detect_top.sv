// tb_face_detect_top: end-to-end test of face_detect_top.
// Generates frames of flat colour patches with noise: large skin-coloured
// blocks, single skin specks (removed by the opening), dark, bright, green
// and blue areas, and sharp edges (texture). A reference model computed here
// follows the whole chain in integer arithmetic of the stated word lengths:
// 3x3 gray gradient and colour rules, YIQ and YCgCr with Q10 coefficients,
// eq. (3) AND eq. (4) AND not-texture, opening by the radius-2 diamond,
// eq. (5) with Q15 ranges, Q10 inverse conversion. Every output pixel and
// mask bit is compared. Each frame uses a different direction of Fig. 3;
// the next frame's ranges are written while the current frame is still
// being adjusted, so they must wait for the frame boundary. Frames are sent
// with and without idle cycles; the gap-free one must come out one pixel
// per clock. Counts how often each mechanism happened and fails if one
// never did.
module tb_face_detect_top;
  import face_pkg::*;
  localparam int W = 24, H = 16, NF = 4;
  localparam int TH = 40;
  logic clk = 0, rst_n = 0, in_valid = 0;
  rgb_col_t in_col;
  logic wr_en = 0, wr_addr = 0;
  logic signed [15:0] wr_data = '0;
  logic out_valid, out_skin, busy, overrun, buf_error;
  rgb_t out_rgb;

  int checks = 0, failures = 0;
  rgb_t img [H][W];
  rgb_t exp_rgb [H][W];
  bit   elem [H][W], ero [H][W], opn [H][W];
  int   n_out, cyc;
  int   f_in [NF];
  bit   gaps_f [NF];
  int   f_first [NF], f_last [NF];
  typedef struct { rgb_t rgb; bit skin; int x; int y; } exp_t;
  exp_t exp_q [$];
  int   n_tex = 0, n_dark = 0, n_hue = 0, n_skin = 0, n_removed = 0, n_adjusted = 0;
  int   n_flush = 0, n_deferred = 0, max_lat = 0;
  int   ir_tab [NF] = '{ 5898,  5898, -5898, -5898};
  int   qr_tab [NF] = '{ 9830, -9830, -9830,  9830};

  face_detect_top #(.WIDTH(W), .HEIGHT(H), .TEX_THRESH(TH), .BUF_DEPTH(256)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.u_open.u_erode.flushing) n_flush++;
    if (dut.u_regs.pending && dut.a_cnt != 0) n_deferred++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int clampi(int v, int lo, int hi);
    return v < lo ? lo : (v > hi ? hi : v);
  endfunction
  function automatic int dot10(int a, int b, int c, int x, int y, int z);
    return (a * x + b * y + c * z + 512) >>> 10;
  endfunction
  function automatic int gray(rgb_t p);
    return clampi(dot10(306, 601, 117, p.r, p.g, p.b), 0, 255);
  endfunction
  function automatic bit diamond(int dx, int dy);
    return (dx < 0 ? -dx : dx) + (dy < 0 ? -dy : dy) <= 2;
  endfunction

  task automatic make_frame(int ir, int qr);
    rgb_t pal [6] = '{'{200, 140, 110}, '{30, 25, 20}, '{245, 245, 240},
                      '{80, 150, 60},   '{60, 90, 200}, '{190, 135, 100}};
    rgb_t base, c;
    int gmax, gmin, g, yy, ii, qq, cg, cr, r, gg, b;
    bit t, d, h, v;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        // 8x8 blocks; even blocks skin, odd ones another colour
        int blk;
        blk = (x / 8) + 3 * (y / 8);
        base = (blk % 2 == 0) ? pal[(blk / 2) % 2 == 0 ? 0 : 5] : pal[1 + $urandom_range(0, 3)];
        if ($urandom_range(0, 40) == 0) base = pal[0];        // isolated skin speck
        c.r = 8'(clampi(int'(base.r) + int'($urandom_range(0, 4)) - 2, 0, 255));
        c.g = 8'(clampi(int'(base.g) + int'($urandom_range(0, 4)) - 2, 0, 255));
        c.b = 8'(clampi(int'(base.b) + int'($urandom_range(0, 4)) - 2, 0, 255));
        img[y][x] = c;
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        gmax = 0; gmin = 255;
        for (int dy = -1; dy <= 1; dy++)
          for (int dx = -1; dx <= 1; dx++) begin
            g = gray(img[clampi(y + dy, 0, H - 1)][clampi(x + dx, 0, W - 1)]);
            gmax = g > gmax ? g : gmax;
            gmin = g < gmin ? g : gmin;
          end
        c = img[y][x];
        t = (gmax - gmin) > TH;
        d = c.r < 80 && c.g < 80 && c.b < 80;
        h = c.r < 230 && c.g < 230 && c.b < 230 && !(c.r > c.g && c.g > c.b);
        ii = clampi(dot10(610, -281, -330, c.r, c.g, c.b), -256, 255);
        qq = clampi(dot10(217, -536,  318, c.r, c.g, c.b), -256, 255);
        cg = clampi(128 + dot10(-326, 450, -124, c.r, c.g, c.b), 0, 255);
        cr = clampi(128 + dot10( 450, -377, -73, c.r, c.g, c.b), 0, 255);
        elem[y][x] = (ii >= 15 && ii <= 90 && qq >= -20 && qq <= 10) &&
                     (cg >= 85 && cg <= 135 && cg + cr >= 260 && cg + cr <= 280) && !(t | d | h);
        n_tex += int'(t); n_dark += int'(d); n_hue += int'(h); n_skin += int'(elem[y][x]);
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        v = 1;
        for (int dy = -2; dy <= 2; dy++)
          for (int dx = -2; dx <= 2; dx++)
            if (diamond(dx, dy) && y + dy >= 0 && y + dy < H && x + dx >= 0 && x + dx < W)
              v &= elem[y + dy][x + dx];
        ero[y][x] = v;
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        v = 0;
        for (int dy = -2; dy <= 2; dy++)
          for (int dx = -2; dx <= 2; dx++)
            if (diamond(dx, dy) && y + dy >= 0 && y + dy < H && x + dx >= 0 && x + dx < W)
              v |= ero[y + dy][x + dx];
        opn[y][x] = v;
        if (elem[y][x] && !v) n_removed++;
        c = img[y][x];
        yy = clampi(dot10(306, 601, 117, c.r, c.g, c.b), 0, 255);
        ii = clampi(dot10(610, -281, -330, c.r, c.g, c.b), -256, 255);
        qq = clampi(dot10(217, -536,  318, c.r, c.g, c.b), -256, 255);
        if (v) begin
          ii = clampi(ii + ((ii * ir + 16384) >>> 15), -256, 255);
          qq = clampi(qq + ((qq * qr + 16384) >>> 15), -256, 255);
          n_adjusted++;
        end
        r  = clampi(dot10(1024,   978,   637, yy, ii, qq), 0, 255);
        gg = clampi(dot10(1024,  -278,  -663, yy, ii, qq), 0, 255);
        b  = clampi(dot10(1024, -1134,  1743, yy, ii, qq), 0, 255);
        exp_rgb[y][x] = '{r: 8'(r), g: 8'(gg), b: 8'(b)};
        exp_q.push_back('{rgb: exp_rgb[y][x], skin: v, x: x, y: y});
      end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      int f;
      checks++;
      f = n_out / (W * H);
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        e = exp_q.pop_front();
        if (out_rgb != e.rgb || out_skin != e.skin) begin
          failures++;
          if (failures < 20)
            $display("frame %0d pixel (%0d,%0d): got %h skin %0d, exp %h skin %0d", f, e.x, e.y,
                     out_rgb, out_skin, e.rgb, e.skin);
        end
      end
      if (n_out % (W * H) == 0) begin
        if (f < NF) f_first[f] = cyc;
      end
      if (f < NF) f_last[f] = cyc;
      n_out++;
    end
  end

  task automatic write_reg(bit a, int v);
    @(negedge clk);
    wr_en = 1; wr_addr = a; wr_data = 16'(v);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic send_frame(int f, bit gaps);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        @(negedge clk);
        in_valid = 0;
        while (gaps && $urandom_range(0, 3) == 0) @(negedge clk);
        // the next frame's ranges arrive while this frame is being adjusted
        if (y == H - 1 && x == 0 && f + 1 < NF) begin
          wr_en = 1; wr_addr = 0; wr_data = 16'(ir_tab[f + 1]);
          @(negedge clk);
          wr_en = 1; wr_addr = 1; wr_data = 16'(qr_tab[f + 1]);
          @(negedge clk);
          wr_en = 0;
        end
        if (y == 0 && x == 0) f_in[f] = cyc;
        in_col[0] = img[clampi(y - 1, 0, H - 1)][x];
        in_col[1] = img[y][x];
        in_col[2] = img[clampi(y + 1, 0, H - 1)][x];
        in_valid = 1;
      end
    @(negedge clk);
    in_valid = 0;
    if (f == NF - 2) begin
      // minimum blanking the design documents: 4 * WIDTH + 16 idle cycles;
      // the next frame starts right after, overlapping the output drain
      repeat (4 * W + 16 - 1) @(negedge clk);
      return;
    end
    repeat (12) @(negedge clk);
    while (busy) @(negedge clk);
    repeat (12) @(negedge clk);
    check_count(f);
  endtask

  task automatic check_count(int f);
    checks++;
    if (n_out != (f + 1) * W * H || exp_q.size() != 0) begin
      failures++;
      $display("after frame %0d: %0d outputs, exp %0d", f, n_out, (f + 1) * W * H);
    end
  endtask

  initial begin
    cyc = 0;
    n_out = 0;
    in_col = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    write_reg(0, ir_tab[0]);
    write_reg(1, qr_tab[0]);
    repeat (2) @(negedge clk);
    for (int f = 0; f < NF; f++) begin
      make_frame(ir_tab[f], qr_tab[f]);
      gaps_f[f] = (f != NF - 1);
      send_frame(f, gaps_f[f]);
    end
    for (int f = 0; f < NF; f++)
      if (f_first[f] - f_in[f] > max_lat) max_lat = f_first[f] - f_in[f];
    for (int f = 0; f < NF; f++)
      if (!gaps_f[f]) begin
        // the two register-write cycles in the last row are the only input gap
        checks++;
        if (f_last[f] - f_first[f] != W * H - 1 + (f + 1 < NF ? 2 : 0)) begin
          failures++;
          $display("gap-free frame %0d: outputs over %0d cycles", f, f_last[f] - f_first[f] + 1);
        end
      end
    checks++;
    if (overrun || buf_error) begin failures++; $display("overrun or buffer error flagged"); end
    $display("texture %0d dark %0d hue %0d skin %0d removed-by-opening %0d adjusted %0d",
             n_tex, n_dark, n_hue, n_skin, n_removed, n_adjusted);
    $display("flush cycles %0d deferred-update cycles %0d first-output latency %0d cycles",
             n_flush, n_deferred, max_lat);
    checks++;
    if (n_tex == 0 || n_dark == 0 || n_hue == 0 || n_skin == 0 || n_removed == 0 ||
        n_adjusted == 0 || n_flush == 0 || n_deferred == 0) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
