// tb_rgb2yiq: checks rgb2yiq against eq. (2) evaluated in floating point
// (Q row with +0.311 for B), allowing 1 LSB of rounding difference, for the
// eight RGB cube corners and 2000 random pixels. Also checks the 2-cycle
// latency and that gray pixels give I = Q = 0.
module tb_rgb2yiq;
  import face_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  rgb_t in_rgb;
  yiq_t out_yiq;
  int checks = 0, failures = 0;

  rgb2yiq dut (.*);
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
    ey = near(0.299 * r + 0.587 * g + 0.114 * b);
    ei = near(0.596 * r - 0.274 * g - 0.322 * b);
    eq = near(0.212 * r - 0.523 * g + 0.311 * b);
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
    if ((int'(out_yiq.y) - ey > 1) || (ey - int'(out_yiq.y) > 1) ||
        (int'(out_yiq.i) - ei > 1) || (ei - int'(out_yiq.i) > 1) ||
        (int'(out_yiq.q) - eq > 1) || (eq - int'(out_yiq.q) > 1)) begin
      failures++;
      $display("rgb %0d %0d %0d: got %0d %0d %0d exp %0d %0d %0d", p.r, p.g, p.b,
               out_yiq.y, out_yiq.i, out_yiq.q, ey, ei, eq);
    end
    if (p.r == p.g && p.g == p.b) begin
      checks++;
      if (out_yiq.i != 0 || out_yiq.q != 0) begin failures++; $display("gray not neutral"); end
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
