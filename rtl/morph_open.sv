// morph_open: morphological opening (X erode B) dilate B of the streamed
// binary skin mask, B being the radius-RADIUS diamond of the paper's Fig. 2
// (13 pixels for RADIUS = 2). It removes skin regions too small to hold B,
// breaks thin bridges and smooths contours while keeping larger regions.
// Built as two morph_window stages, erosion then dilation, each with
// 2*RADIUS one-bit line buffers. One output per input pixel, raster order.
// Latency is about RADIUS lines + RADIUS pixels per stage; at the end of a
// frame the stages flush themselves, so the input needs about
// 2*RADIUS*WIDTH + 2*RADIUS + 8 idle cycles between frames (busy is high
// meanwhile; input during a flush is dropped and sets `overrun`).
module morph_open #(
  parameter int unsigned WIDTH  = 640,
  parameter int unsigned HEIGHT = 480,
  parameter int unsigned RADIUS = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_bit,
  output logic out_valid,
  output logic out_bit,
  output logic busy,
  output logic overrun
);

  logic ev, eb, e_busy, d_busy, e_ovr, d_ovr;

  morph_window #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .R(RADIUS), .DILATE(1'b0)) u_erode (
    .clk, .rst_n, .in_valid, .in_bit,
    .out_valid(ev), .out_bit(eb), .busy(e_busy), .overrun(e_ovr)
  );

  morph_window #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .R(RADIUS), .DILATE(1'b1)) u_dilate (
    .clk, .rst_n, .in_valid(ev), .in_bit(eb),
    .out_valid, .out_bit, .busy(d_busy), .overrun(d_ovr)
  );

  assign busy    = e_busy | d_busy;
  assign overrun = e_ovr | d_ovr;

endmodule
