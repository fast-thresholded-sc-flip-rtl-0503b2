// crc_check: CRC-16 check of the decoded information bits.
//
// Runs the CRC with generator polynomial 0x1021 (the paper's C = 16 code)
// over the non-frozen bits of the decoded vector u, in leaf order, and reports
// whether the remainder is zero.  The message is assumed to carry its 16 CRC
// bits as the last 16 information bits, most significant first, with a zero
// initial register; the paper names the polynomial but not this framing.
// The vector is processed P leaves per cycle (frozen leaves are skipped), so
// a check takes N/P cycles after `start`, then `done` pulses with `ok`.
module crc_check #(
  parameter int unsigned N = ftscf_pkg::N_DEF,
  parameter int unsigned P = ftscf_pkg::P_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] u,
  input  logic [N-1:0] info,     // 1 = non-frozen leaf
  output logic         busy,
  output logic         done,
  output logic         ok
);
  localparam int unsigned NC = N / P;
  localparam int unsigned CB = (NC > 1) ? $clog2(NC) : 1;
  logic [15:0]   crc, nxt;
  logic [CB-1:0] chunk;

  always_comb begin
    nxt = crc;
    for (int i = 0; i < P; i++) begin
      logic fb;
      fb = nxt[15] ^ u[int'(chunk) * P + i];
      if (info[int'(chunk) * P + i])
        nxt = {nxt[14:0], 1'b0} ^ (fb ? ftscf_pkg::CRC_POLY : 16'h0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      crc <= '0; chunk <= '0; busy <= 1'b0; done <= 1'b0; ok <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        crc <= '0; chunk <= '0; busy <= 1'b1;
      end else if (busy) begin
        crc   <= nxt;
        chunk <= chunk + 1'b1;
        if (int'(chunk) == NC - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          ok   <= (nxt == 16'h0);
        end
      end
    end
  end
endmodule
