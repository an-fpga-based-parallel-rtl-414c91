// user_regs: the user register group and its control logic.
// The paper's only user settings are two 16-bit signed registers giving the
// range of the I and Q variation from -100 % to +100 % (Q15: -18 % is
// -5898); their signs select one of the four directions of Fig. 3
// (toward red, yellow, green or magenta). A write (wr_en, wr_addr 0 = I,
// 1 = Q) lands in a pending register the next cycle; the pending pair is
// copied to the active outputs while `apply` is high (the top raises it between frames), so a frame is never
// adjusted with two settings. The write port, reset value 0 (no change) and
// frame-boundary update are this design's choices.
module user_regs (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_en,
  input  logic               wr_addr,
  input  logic signed [15:0] wr_data,
  input  logic               apply,
  output logic signed [15:0] i_range,
  output logic signed [15:0] q_range,
  output logic               pending     // a written value is not yet active
);

  logic signed [15:0] i_pend, q_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_pend  <= '0;
      q_pend  <= '0;
      i_range <= '0;
      q_range <= '0;
      pending <= 1'b0;
    end else begin
      if (apply) begin
        i_range <= i_pend;
        q_range <= q_pend;
        pending <= 1'b0;
      end
      if (wr_en) begin
        if (wr_addr) q_pend <= wr_data;
        else         i_pend <= wr_data;
        pending <= 1'b1;
      end
    end
  end

endmodule
