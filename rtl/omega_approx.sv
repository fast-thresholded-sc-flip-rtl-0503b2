// omega_approx: approximate LLR threshold of the Fast-TSCF decoder.
//
// Computes Omega* = 2 (x + 3), where x is the channel estimate Eb/N0 in dB.
// This linear law, chosen for cheap hardware, is the paper's; it replaces the
// code- and SNR-dependent optimum threshold that would otherwise come from
// off-line Monte-Carlo runs.  The input is a signed fixed-point number with
// SNR_FRAC fractional bits; the output is expressed in the decoder's LLR
// units (LLR_FRAC fractional bits), so it can be compared directly with LLR
// magnitudes.  Negative results (x < -3 dB) clamp to 0, large ones saturate.
// The fixed-point formats are this design's choice.  Purely combinational:
// the decoder samples the result at the start of a frame.
module omega_approx #(
  parameter int unsigned SNR_W    = ftscf_pkg::SNR_W_DEF,
  parameter int unsigned SNR_FRAC = ftscf_pkg::SNR_FRAC,
  parameter int unsigned LLR_FRAC = ftscf_pkg::LLR_FRAC,
  parameter int unsigned OW       = ftscf_pkg::OMEGA_W
) (
  input  logic signed [SNR_W-1:0] snr_db,  // Eb/N0 * 2^SNR_FRAC
  output logic        [OW-1:0]    omega    // Omega* * 2^LLR_FRAC
);
  // 2(x+3) in units of 2^-SNR_FRAC, then rescaled to 2^-LLR_FRAC.
  localparam int unsigned WW = SNR_W + OW + 4;
  logic signed [WW-1:0] twice, scaled;

  always_comb begin
    twice = (WW'(snr_db) + WW'(signed'(3 << SNR_FRAC))) <<< 1;
    if (LLR_FRAC >= SNR_FRAC) scaled = twice <<< (LLR_FRAC - SNR_FRAC);
    else                      scaled = twice >>> (SNR_FRAC - LLR_FRAC);
    if (scaled < 0)                          omega = '0;
    else if (scaled > WW'((1 << OW) - 1))    omega = '1;
    else                                     omega = scaled[OW-1:0];
  end
endmodule
