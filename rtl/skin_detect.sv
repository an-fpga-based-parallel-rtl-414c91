// skin_detect: skin-colour decision for one pixel.
// Two models from the paper are tested in parallel:
//   Cg-Cr parallelogram, eq. (3): 85 <= Cg <= 135 and 260 <= Cg + Cr <= 280
//   I-Q rectangle,       eq. (4): 15 <= I <= 90   and -20 <= Q <= 10
// and the 3-input AND of the paper combines them with the inverted
// texture/colour-condition bit: skin = iq & cgcr & !tex. All three decisions
// are registered (latency 1 cycle). Inclusive bounds and the single register
// stage are this design's choice; the AND sits here because the paper's
// block diagram draws three lines from skin detection into the opening.
module skin_detect
  import face_pkg::*;
#(
  parameter int CG_MIN       = 85,
  parameter int CG_MAX       = 135,
  parameter int CGCR_SUM_MIN = 260,
  parameter int CGCR_SUM_MAX = 280,
  parameter int I_MIN        = 15,
  parameter int I_MAX        = 90,
  parameter int Q_MIN        = -20,
  parameter int Q_MAX        = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  ycc_t in_ycc,
  input  yiq_t in_yiq,
  input  logic in_tex,          // 1 = texture or excluded colour (non-skin)
  output logic out_valid,
  output logic out_iq_skin,
  output logic out_cgcr_skin,
  output logic out_skin
);

  logic iq_ok, cgcr_ok;
  int   cg, cr, ii, qq;

  always_comb begin
    cg = int'(in_ycc.cg);
    cr = int'(in_ycc.cr);
    ii = int'(in_yiq.i);
    qq = int'(in_yiq.q);
    cgcr_ok = (cg >= CG_MIN) && (cg <= CG_MAX) &&
              (cg + cr >= CGCR_SUM_MIN) && (cg + cr <= CGCR_SUM_MAX);
    iq_ok   = (ii >= I_MIN) && (ii <= I_MAX) && (qq >= Q_MIN) && (qq <= Q_MAX);
  end

  always_ff @(posedge clk) begin
    out_iq_skin   <= iq_ok;
    out_cgcr_skin <= cgcr_ok;
    out_skin      <= iq_ok & cgcr_ok & ~in_tex;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
