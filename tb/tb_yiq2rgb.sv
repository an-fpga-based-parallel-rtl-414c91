// tb_yiq2rgb: converts random RGB pixels to YIQ with eq. (2) in floating
// point (rounded to integers), feeds the result to yiq2rgb and checks that
// the original RGB comes back within 2 LSB (integer YIQ rounding plus the
// converter's own rounding). Also feeds 500 arbitrary YIQ words and checks
// them, clamped to 0..255, against the inverse matrix in floating point.
// Checks the 2-cycle latency.
module tb_yiq2rgb;
  import face_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  yiq_t in_yiq;
  rgb_t out_rgb;
  int checks = 0, failures = 0;

  yiq2rgb dut (.*);
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

  function automatic bit close(int a, int b, int tol);
    return (a - b <= tol) && (b - a <= tol);
  endfunction

  task automatic run(yiq_t v, rgb_t exp_rgb, int tol);
    @(negedge clk);
    in_yiq = v; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (out_valid) begin failures++; $display("valid too early"); end
    @(negedge clk);
    checks++;
    if (!out_valid) begin failures++; $display("no valid after 2 cycles"); end
    checks++;
    if (!close(out_rgb.r, exp_rgb.r, tol) || !close(out_rgb.g, exp_rgb.g, tol) ||
        !close(out_rgb.b, exp_rgb.b, tol)) begin
      failures++;
      $display("yiq %0d %0d %0d: got %0d %0d %0d exp %0d %0d %0d", v.y, v.i, v.q,
               out_rgb.r, out_rgb.g, out_rgb.b, exp_rgb.r, exp_rgb.g, exp_rgb.b);
    end
  endtask

  initial begin
    rgb_t p;
    yiq_t v;
    real r, g, b;
    in_yiq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      p = rgb_t'($urandom);
      r = real'(p.r); g = real'(p.g); b = real'(p.b);
      v.y = 8'(near(0.299 * r + 0.587 * g + 0.114 * b));
      v.i = 9'(near(0.596 * r - 0.274 * g - 0.322 * b));
      v.q = 9'(near(0.212 * r - 0.523 * g + 0.311 * b));
      run(v, p, 2);
    end
    // arbitrary YIQ words, many out of gamut
    for (int n = 0; n < 500; n++) begin
      v = yiq_t'($urandom);
      r = real'(v.y) + 0.9548892 * real'(v.i) + 0.62210394 * real'(v.q);
      g = real'(v.y) - 0.27135478 * real'(v.i) - 0.64751203 * real'(v.q);
      b = real'(v.y) - 1.10725101 * real'(v.i) + 1.70246037 * real'(v.q);
      p.r = 8'(near(r < 0.0 ? 0.0 : (r > 255.0 ? 255.0 : r)));
      p.g = 8'(near(g < 0.0 ? 0.0 : (g > 255.0 ? 255.0 : g)));
      p.b = 8'(near(b < 0.0 ? 0.0 : (b > 255.0 ? 255.0 : b)));
      run(v, p, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
