// rate1_node: Rate-1 node decoder with the thresholded flip criterion.
//
// A Rate-1 node (no frozen leaf) of 2^s leaves is decoded by taking the hard
// decision of every top-node LLR: beta_i = 1 when LLR_i < 0.  Following the
// paper, the node contributes one bit-flip candidate, the top-node index
// holding the smallest |LLR|, and only if that magnitude is at most the
// threshold Omega.  When `flip` is set (a later decoding attempt targets this
// node) the hard decision at that index is inverted.  The LLRs are lanes
// 0 .. 2^s-1 of a P-lane word; beta lanes above the node are 0.
// Combinational.
module rate1_node #(
  parameter int unsigned P    = ftscf_pkg::P_DEF,
  parameter int unsigned QI   = ftscf_pkg::QI_DEF,
  parameter int unsigned OW   = ftscf_pkg::OMEGA_W,
  parameter int unsigned LOGP = $clog2(P)
) (
  input  logic [P-1:0][QI-1:0]        llr,
  input  logic [$clog2(LOGP+1)-1:0]   s,
  input  logic [OW-1:0]               omega,
  input  logic                        flip,      // apply the flip
  output logic [P-1:0]                beta,
  output logic                        cand,      // eta exists (min |LLR| <= Omega)
  output logic [LOGP-1:0]             cand_idx   // eta
);
  logic [2:0][LOGP-1:0] idx;
  logic [2:0][QI-2:0]   mag;

  min3_finder #(.P(P), .QI(QI), .LOGP(LOGP)) u_min (.llr, .s, .idx, .mag);

  always_comb begin
    for (int i = 0; i < P; i++)
      beta[i] = (i < (1 << s)) ? llr[i][QI-1] : 1'b0;
    cand     = (OW+QI)'(mag[0]) <= (OW+QI)'(omega);
    cand_idx = idx[0];
    if (flip) beta[idx[0]] = ~beta[idx[0]];
  end
endmodule
