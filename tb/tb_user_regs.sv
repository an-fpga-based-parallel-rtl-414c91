// tb_user_regs: checks that writes to the two range registers stay pending
// until `apply`, that both become active together on `apply`, that a write
// without `apply` does not change the active values, and the reset value 0.
// Uses the paper's example value -18 % = -5898.
module tb_user_regs;
  logic clk = 0, rst_n = 0, wr_en = 0, wr_addr = 0, apply = 0, pending;
  logic signed [15:0] wr_data = '0, i_range, q_range;
  int checks = 0, failures = 0;

  user_regs dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_regs(int ei, int eq, bit ep, string what);
    checks++;
    if (i_range != 16'(ei) || q_range != 16'(eq) || pending != ep) begin
      failures++;
      $display("%s: got i %0d q %0d p %0d, exp i %0d q %0d p %0d", what, i_range, q_range,
               pending, ei, eq, ep);
    end
  endtask

  task automatic write(bit a, int d);
    @(negedge clk);
    wr_en = 1; wr_addr = a; wr_data = 16'(d);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic pulse_apply();
    @(negedge clk);
    apply = 1;
    @(negedge clk);
    apply = 0;
  endtask

  initial begin
    int vi, vq;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_regs(0, 0, 0, "reset");
    write(0, -5898);
    expect_regs(0, 0, 1, "pending I");
    write(1, 3277);
    expect_regs(0, 0, 1, "pending Q");
    pulse_apply();
    expect_regs(-5898, 3277, 0, "applied");
    for (int n = 0; n < 200; n++) begin
      vi = int'($urandom_range(0, 65535)) - 32768;
      vq = int'($urandom_range(0, 65535)) - 32768;
      write(0, vi);
      write(1, vq);
      checks++;
      if (i_range == 16'(vi) && q_range == 16'(vq) && (vi != 0 || vq != 0)) begin
        failures++;
        $display("values active before apply");
      end
      pulse_apply();
      expect_regs(vi, vq, 0, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
