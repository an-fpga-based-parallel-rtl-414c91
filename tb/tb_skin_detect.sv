// tb_skin_detect: checks the Cg-Cr parallelogram (85 <= Cg <= 135,
// 260 <= Cg + Cr <= 280), the I-Q rectangle (15 <= I <= 90,
// -20 <= Q <= 10) and the AND with the inverted texture bit, on every
// boundary value of the two models and on 5000 random pixels drawn near
// the skin region. Checks the 1-cycle latency and counts how many pixels
// were judged skin, so the test is known to exercise both outcomes.
module tb_skin_detect;
  import face_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_tex = 0;
  ycc_t in_ycc;
  yiq_t in_yiq;
  logic out_valid, out_iq_skin, out_cgcr_skin, out_skin;
  int checks = 0, failures = 0, n_skin = 0;

  skin_detect dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int cg, int cr, int i, int q, bit tex);
    bit e_cc, e_iq;
    e_cc = (cg >= 85 && cg <= 135 && cr >= 260 - cg && cr <= 280 - cg);
    e_iq = (i >= 15 && i <= 90 && q >= -20 && q <= 10);
    @(negedge clk);
    in_ycc = '{y: 8'($urandom), cg: 8'(cg), cr: 8'(cr)};
    in_yiq = '{y: 8'($urandom), i: 9'(i), q: 9'(q)};
    in_tex = tex; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid || out_cgcr_skin != e_cc || out_iq_skin != e_iq ||
        out_skin != (e_cc && e_iq && !tex)) begin
      failures++;
      $display("cg %0d cr %0d i %0d q %0d tex %0d: got v%0d cc%0d iq%0d s%0d", cg, cr, i, q, tex,
               out_valid, out_cgcr_skin, out_iq_skin, out_skin);
    end
    if (out_skin) n_skin++;
  endtask

  initial begin
    in_ycc = '0; in_yiq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // boundaries of each bound, other coordinates inside
    for (int cg = 83; cg <= 137; cg++) run(cg, 270 - cg, 50, 0, 0);
    for (int s = 257; s <= 283; s++) run(110, s - 110, 50, 0, 0);
    for (int i = 12; i <= 93; i++) run(110, 160, i, 0, 0);
    for (int q = -23; q <= 13; q++) run(110, 160, 50, q, 0);
    run(110, 160, 50, 0, 1);
    for (int n = 0; n < 5000; n++)
      run(70 + $urandom_range(0, 80), 120 + $urandom_range(0, 80),
          $urandom_range(0, 110), int'($urandom_range(0, 50)) - 30, 1'($urandom_range(0, 3) == 0));
    checks++;
    if (n_skin < 100) begin failures++; $display("too few skin pixels: %0d", n_skin); end
    $display("skin pixels seen: %0d", n_skin);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
