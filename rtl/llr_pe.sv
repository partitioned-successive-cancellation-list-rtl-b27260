// llr_pe: one LLR processing element of the SC decoder tree.
//
// Computes one output LLR of a node update (paper, Eq. 3):
//   f: y = sgn(a) sgn(b) min(|a|, |b|)         (left child)
//   g: y = b + (1 - 2 beta) a                  (right child)
// where a = alpha[i] and b = alpha[i + 2^(s-1)] of the parent node and beta is
// the partial sum of the left child. The rules are the paper's. LLRs are
// two's-complement QA-bit numbers; results are saturated to the symmetric
// range +-(2^(QA-1) - 1), a choice of this design (the paper gives only the
// width Q_alpha). Purely combinational.
module llr_pe
  import pscl_pkg::*;
#(
  parameter int unsigned QA = 6
) (
  input  llr_op_e               op,
  input  logic signed [QA-1:0]  a,
  input  logic signed [QA-1:0]  b,
  input  logic                  beta,
  output logic signed [QA-1:0]  y
);
  localparam logic signed [QA+1:0] MAXV = (QA+2)'((1 << (QA - 1)) - 1);

  logic signed [QA+1:0] ax, bx, abs_a, abs_b, mag, sum;

  always_comb begin
    ax    = (QA+2)'(a);
    bx    = (QA+2)'(b);
    abs_a = (ax < 0) ? -ax : ax;
    abs_b = (bx < 0) ? -bx : bx;
    mag   = (abs_a < abs_b) ? abs_a : abs_b;
    if (mag > MAXV) mag = MAXV;
    sum   = beta ? (bx - ax) : (bx + ax);
    if (op == OP_F) begin
      y = ((a < 0) != (b < 0)) ? QA'(-mag) : QA'(mag);
    end else begin
      if (sum > MAXV)       y = QA'(MAXV);
      else if (sum < -MAXV) y = QA'(-MAXV);
      else                  y = QA'(sum);
    end
  end
endmodule
