// pe_array: P parallel LLR processing elements of the SC decoding tree.
//
// Each lane computes, for a parent node of the decoding tree, either the LLR
// of the left child (f, min-sum: sgn(a) sgn(b) min(|a|,|b|)) or of the right
// child (g: b + (1 - 2 beta) a), where a is the LLR from the parent's first
// half, b the LLR from its second half and beta the partial sum of the left
// child.  These are the paper's update rules.  LLRs are two's complement,
// QI bits, kept in the symmetric range +-(2^(QI-1)-1); g saturates to that
// range (saturation is this design's choice, the paper gives no word length).
// Purely combinational; the decoder processes one P-lane word per cycle.
module pe_array #(
  parameter int unsigned P  = ftscf_pkg::P_DEF,
  parameter int unsigned QI = ftscf_pkg::QI_DEF
) (
  input  logic                   op_g,  // 0: f (left child), 1: g (right child)
  input  logic [P-1:0][QI-1:0]   a,     // parent LLRs, first half
  input  logic [P-1:0][QI-1:0]   b,     // parent LLRs, second half
  input  logic [P-1:0]           beta,  // left-child partial sums (g only)
  output logic [P-1:0][QI-1:0]   y
);
  localparam logic signed [QI:0] MAXV = (QI+1)'((1 << (QI-1)) - 1);

  always_comb begin
    for (int i = 0; i < P; i++) begin
      logic signed [QI-1:0] av, bv;
      logic        [QI-1:0] ma, mb, mm;
      logic signed [QI:0]   s;
      av = signed'(a[i]);
      bv = signed'(b[i]);
      ma = av[QI-1] ? QI'(-av) : QI'(av);
      mb = bv[QI-1] ? QI'(-bv) : QI'(bv);
      mm = (ma < mb) ? ma : mb;
      s  = beta[i] ? ((QI+1)'(bv) - (QI+1)'(av)) : ((QI+1)'(bv) + (QI+1)'(av));
      if (!op_g)
        y[i] = (av[QI-1] ^ bv[QI-1]) ? QI'(-signed'(mm)) : mm;
      else if (s > MAXV)
        y[i] = QI'(MAXV);
      else if (s < -MAXV)
        y[i] = QI'(-MAXV);
      else
        y[i] = s[QI-1:0];
    end
  end
endmodule
