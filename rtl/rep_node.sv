// rep_node: repetition node decoder with the thresholded flip criterion.
//
// In a Rep node only the last of its 2^s leaves carries information, so the
// node's codeword is all-zero or all-one.  As in the paper, the LLR of that
// single bit is the sum of all top-node LLRs; its sign gives the decision
// (beta_i = 1 for every lane when the sum is negative; a zero sum decides 0).
// The whole node is a flip candidate when |sum| is at most Omega; with `flip`
// set the decision is inverted.  The sum is kept at full precision
// (QI + log2 P bits).  Combinational; LLRs in lanes 0 .. 2^s-1.
module rep_node #(
  parameter int unsigned P    = ftscf_pkg::P_DEF,
  parameter int unsigned QI   = ftscf_pkg::QI_DEF,
  parameter int unsigned OW   = ftscf_pkg::OMEGA_W,
  parameter int unsigned LOGP = $clog2(P)
) (
  input  logic [P-1:0][QI-1:0]        llr,
  input  logic [$clog2(LOGP+1)-1:0]   s,
  input  logic [OW-1:0]               omega,
  input  logic                        flip,
  output logic [P-1:0]                beta,
  output logic                        cand
);
  localparam int unsigned SW = QI + LOGP + 1;
  logic signed [SW-1:0] sum;
  logic        [SW-1:0] mag;
  logic                 dec;

  always_comb begin
    sum = '0;
    for (int i = 0; i < P; i++)
      if (i < (1 << s)) sum += SW'(signed'(llr[i]));
    mag  = sum[SW-1] ? SW'(-sum) : SW'(sum);
    cand = (SW+OW)'(mag) <= (SW+OW)'(omega);
    dec  = sum[SW-1] ^ flip;
    for (int i = 0; i < P; i++)
      beta[i] = (i < (1 << s)) ? dec : 1'b0;
  end
endmodule
