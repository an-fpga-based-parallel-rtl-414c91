// tb_yiq_buffer: drives random pushes and pops into a small yiq_buffer and
// compares every popped word with a queue model; fills it to full, checks
// `full`, the overflow flag on one push too many, drains it and checks the
// underflow flag on one pop too many.
module tb_yiq_buffer;
  localparam int W = 26, D = 16;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [W-1:0] din = '0, dout;
  logic empty, full, overflow, underflow;
  logic [$clog2(D):0] level;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  yiq_buffer #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cycle(bit pu, bit po);
    logic [W-1:0] d;
    d = W'($urandom);
    @(negedge clk);
    push = pu && (model.size() < D);
    pop  = po && (model.size() > 0);
    din  = d;
    if (pop) begin
      checks++;
      if (empty || dout != model[0]) begin
        failures++;
        $display("pop: got %h exp %h", dout, model[0]);
      end
    end
    @(posedge clk);
    if (pop)  void'(model.pop_front());
    if (push) model.push_back(d);
    #1;
    push = 0; pop = 0;
    checks++;
    if (int'(level) != model.size() || empty != (model.size() == 0) || full != (model.size() == D)) begin
      failures++;
      $display("status: level %0d exp %0d", level, model.size());
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) cycle(1'($urandom), 1'($urandom));
    while (model.size() < D) cycle(1, 0);
    checks++;
    if (!full || overflow) begin failures++; $display("full/overflow wrong"); end
    @(negedge clk); push = 1; @(negedge clk); push = 0;
    checks++;
    if (!overflow) begin failures++; $display("overflow not flagged"); end
    while (model.size() > 0) cycle(0, 1);
    @(negedge clk); pop = 1; @(negedge clk); pop = 0;
    checks++;
    if (!underflow) begin failures++; $display("underflow not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
