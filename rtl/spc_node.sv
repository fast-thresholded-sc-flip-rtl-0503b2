// spc_node: single-parity-check node decoder with two thresholded flip subsets.
//
// In an SPC node only the first of the 2^s leaves is frozen, so the node's
// codeword has even parity.  Decoding takes the hard decisions h_i of the
// top-node LLRs and, if their parity p is odd, inverts the decision with the
// smallest |LLR|.  For flipping, the paper evaluates two subsets built from
// the indices i1, i2, i3 of the three smallest magnitudes:
//   eta_1: p = 1 -> {i2}      if |a_i2| <= Omega
//          p = 0 -> {i1, i2}  if |a_i1| + |a_i2| <= Omega
//   eta_2: p = 1 -> {i3}      if |a_i3| <= Omega
//          p = 0 -> {i1, i3}  if |a_i1| + |a_i3| <= Omega
// Applying a subset keeps the parity even: for p = 1 the named index is
// inverted instead of i1, for p = 0 both named indices are inverted.  `flip`
// applies subset `sel` (0: eta_1, 1: eta_2).  Combinational; s >= 2.
module spc_node #(
  parameter int unsigned P    = ftscf_pkg::P_DEF,
  parameter int unsigned QI   = ftscf_pkg::QI_DEF,
  parameter int unsigned OW   = ftscf_pkg::OMEGA_W,
  parameter int unsigned LOGP = $clog2(P)
) (
  input  logic [P-1:0][QI-1:0]        llr,
  input  logic [$clog2(LOGP+1)-1:0]   s,
  input  logic [OW-1:0]               omega,
  input  logic                        flip,
  input  logic                        sel,
  output logic [P-1:0]                beta,
  output logic [1:0]                  cand     // [0]: eta_1 exists, [1]: eta_2
);
  localparam int unsigned CW = QI + OW;
  logic [2:0][LOGP-1:0] idx;
  logic [2:0][QI-2:0]   mag;
  logic                 p;
  logic [LOGP-1:0]      other;

  min3_finder #(.P(P), .QI(QI), .LOGP(LOGP)) u_min (.llr, .s, .idx, .mag);

  always_comb begin
    p = 1'b0;
    for (int i = 0; i < P; i++) begin
      beta[i] = (i < (1 << s)) ? llr[i][QI-1] : 1'b0;
      p ^= beta[i];
    end
    if (p) begin
      cand[0] = CW'(mag[1]) <= CW'(omega);
      cand[1] = CW'(mag[2]) <= CW'(omega);
    end else begin
      cand[0] = CW'(mag[0]) + CW'(mag[1]) <= CW'(omega);
      cand[1] = CW'(mag[0]) + CW'(mag[2]) <= CW'(omega);
    end
    other = sel ? idx[2] : idx[1];
    if (!flip) begin
      if (p) beta[idx[0]] = ~beta[idx[0]];
    end else begin
      if (!p) beta[idx[0]] = ~beta[idx[0]];
      beta[other] = ~beta[other];
    end
  end
endmodule
