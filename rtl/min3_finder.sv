// min3_finder: the three smallest LLR magnitudes among the first 2^s lanes.
//
// Returns the lane indices and magnitudes of the smallest, second and third
// smallest |LLR| among lanes 0 .. 2^s-1 of a P-lane word.  Ties go to the
// lower lane.  Used by the Rate-1 node (argmin) and the SPC node (first three
// minima).  Implemented as a linear insertion scan; combinational.
module min3_finder #(
  parameter int unsigned P    = ftscf_pkg::P_DEF,
  parameter int unsigned QI   = ftscf_pkg::QI_DEF,
  parameter int unsigned LOGP = $clog2(P)
) (
  input  logic [P-1:0][QI-1:0] llr,
  input  logic [$clog2(LOGP+1)-1:0] s,      // node size is 2^s lanes
  output logic [2:0][LOGP-1:0] idx,         // idx[0]: smallest
  output logic [2:0][QI-2:0]   mag
);
  always_comb begin
    idx = '0;
    mag = '1;
    for (int i = 0; i < P; i++) begin
      logic signed [QI-1:0] v;
      logic [QI-2:0] m;
      v = signed'(llr[i]);
      m = v[QI-1] ? (QI-1)'(-v) : v[QI-2:0];
      if (i < (1 << s)) begin
        if (m < mag[0] || i == 0) begin
          mag[2] = mag[1]; idx[2] = idx[1];
          mag[1] = mag[0]; idx[1] = idx[0];
          mag[0] = m;      idx[0] = LOGP'(i);
        end else if (m < mag[1] || i == 1) begin
          mag[2] = mag[1]; idx[2] = idx[1];
          mag[1] = m;      idx[1] = LOGP'(i);
        end else if (m < mag[2] || i == 2) begin
          mag[2] = m;      idx[2] = LOGP'(i);
        end
      end
    end
  end
endmodule
