// tb_skin_tone_adjust: checks eq. (5), I_out = I + I * I_range and
// Q_out = Q + Q * Q_range with Q15 ranges, computed in floating point
// (tolerance 1 LSB), for all four directions of the paper's Fig. 3 (signs of
// the two ranges), the paper's -18 % example, +-100 % and random ranges;
// non-skin pixels and Y must pass unchanged. Checks the 1-cycle latency.
module tb_skin_tone_adjust;
  import face_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_skin = 0;
  yiq_t in_yiq;
  logic signed [15:0] i_range = '0, q_range = '0;
  logic out_valid, out_skin;
  yiq_t out_yiq;
  int checks = 0, failures = 0;
  int dir_seen [4];

  skin_tone_adjust dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat9(real v);
    int n;
    n = (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
    return n > 255 ? 255 : (n < -256 ? -256 : n);
  endfunction

  function automatic bit close(int a, int b);
    return (a - b <= 1) && (b - a <= 1);
  endfunction

  task automatic run(yiq_t v, bit skin, int ir, int qr);
    int ei, eq;
    ei = skin ? sat9(real'(v.i) * (1.0 + real'(ir) / 32768.0)) : int'(v.i);
    eq = skin ? sat9(real'(v.q) * (1.0 + real'(qr) / 32768.0)) : int'(v.q);
    @(negedge clk);
    in_yiq = v; in_skin = skin; i_range = 16'(ir); q_range = 16'(qr); in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid || out_yiq.y != v.y || !close(int'(out_yiq.i), ei) ||
        !close(int'(out_yiq.q), eq) || out_skin != skin ||
        (!skin && (out_yiq.i != v.i || out_yiq.q != v.q))) begin
      failures++;
      $display("yiq %0d %0d %0d skin %0d ranges %0d %0d: got %0d %0d %0d exp i %0d q %0d",
               v.y, v.i, v.q, skin, ir, qr, out_yiq.y, out_yiq.i, out_yiq.q, ei, eq);
    end
    if (skin) dir_seen[(ir < 0 ? 2 : 0) + (qr < 0 ? 1 : 0)]++;
  endtask

  initial begin
    yiq_t v;
    in_yiq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // paper example: -18 % on I, I = 50 -> 41
    run('{y: 8'd120, i: 9'sd50, q: -9'sd10}, 1, -5898, 0);
    checks++;
    if (out_yiq.i != 9'sd41) begin failures++; $display("-18%% example wrong: %0d", out_yiq.i); end
    run('{y: 8'd120, i: 9'sd50, q: -9'sd10}, 1, -32768, -32768);   // -100 %: to zero
    checks++;
    if (out_yiq.i != 0 || out_yiq.q != 0) begin failures++; $display("-100%% not zero"); end
    run('{y: 8'd120, i: 9'sd200, q: -9'sd200}, 1, 32767, 32767);   // saturates
    for (int n = 0; n < 4000; n++) begin
      v = yiq_t'($urandom);
      run(v, 1'($urandom), int'($urandom_range(0, 65535)) - 32768, int'($urandom_range(0, 65535)) - 32768);
    end
    for (int d = 0; d < 4; d++) begin
      checks++;
      if (dir_seen[d] == 0) begin failures++; $display("direction %0d not exercised", d); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
