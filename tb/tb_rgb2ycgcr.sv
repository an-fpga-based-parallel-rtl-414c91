// tb_rgb2ycgcr: checks rgb2yiq against eq. (2) evaluated in floating point
// (Q row with +0.311 for B), allowing 1 LSB of rounding difference, for the
// eight RGB cube corners and 2000 random pixels. Also checks the 2-cycle
// latency and that gray pixels give I = Q = 0.
module tb_rgb2ycgcr;
  import face_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  rgb_t in_rgb;
  ycc_t out_ycc;
  int checks = 0, failures = 0;

  rgb2ycgcr dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int near(real v);
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  task automatic check_one(rgb_t p);
    real r, g, b;
    int ey, ei, eq;
    r = real'(p.r); g = real'(p.g); b = real'(p.b);
    r = r / 255.0; g = g / 255.0; b = b / 255.0;
    ey = near(16.0  + 65.481 * r + 128.553 * g + 24.966 * b);
    ei = near(128.0 - 81.085 * r + 112.0   * g - 30.915 * b);
    eq = near(128.0 + 112.0  * r - 93.786  * g - 18.214 * b);
    @(negedge clk);
    in_rgb = p; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (out_valid) begin failures++; $display("valid too early"); end
    @(negedge clk);
    checks++;
    if (!out_valid) begin failures++; $display("no valid after 2 cycles"); end
    checks++;
    if ((int'(out_ycc.y) - ey > 1) || (ey - int'(out_ycc.y) > 1) ||
        (int'(out_ycc.cg) - ei > 1) || (ei - int'(out_ycc.cg) > 1) ||
        (int'(out_ycc.cr) - eq > 1) || (eq - int'(out_ycc.cr) > 1)) begin
      failures++;
      $display("rgb %0d %0d %0d: got %0d %0d %0d exp %0d %0d %0d", p.r, p.g, p.b,
               out_ycc.y, out_ycc.cg, out_ycc.cr, ey, ei, eq);
    end
    if (p.r == p.g && p.g == p.b) begin
      checks++;
      if (out_ycc.cg != 128 || out_ycc.cr != 128) begin failures++; $display("gray not neutral"); end
    end
  endtask

  initial begin
    in_rgb = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 8; c++) check_one('{r: c[0] ? 8'd255 : 8'd0, g: c[1] ? 8'd255 : 8'd0, b: c[2] ? 8'd255 : 8'd0});
    for (int n = 0; n < 2000; n++) check_one(rgb_t'($urandom));
    for (int v = 0; v < 256; v += 15) check_one('{r: 8'(v), g: 8'(v), b: 8'(v)});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
