// yiq_buffer: the YIQ data buffer that holds each pixel's Y, I, Q while its
// skin mask travels through the morphological opening.
// A first-word-fall-through FIFO: `dout` shows the oldest entry whenever
// `empty` is low and `pop` removes it. The storage is a DEPTH x WIDTH array
// (block RAM sized), written on `push`. Pushing when full or popping when
// empty is ignored and sets the sticky `overflow` / `underflow` flag. The
// paper only says the buffer keeps YIQ synchronised with the opening; the
// FIFO form and its depth (4096 covers the ~4 lines the opening holds at a
// 640-pixel width) are this design's choice.
module yiq_buffer #(
  parameter int unsigned WIDTH = 26,
  parameter int unsigned DEPTH = 4096
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full,
  output logic             overflow,
  output logic             underflow,
  output logic [$clog2(DEPTH):0] level
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_push, do_pop;

  assign empty   = (level == 0);
  assign full    = (level == DEPTH[AW:0]);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
      level <= '0;
      overflow <= 1'b0;
      underflow <= 1'b0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      level <= level + (AW+1)'(do_push) - (AW+1)'(do_pop);
      if (push && full)  overflow  <= 1'b1;
      if (pop  && empty) underflow <= 1'b1;
    end
  end

endmodule
