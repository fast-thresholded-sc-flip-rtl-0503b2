// tb_omega_approx: checks the threshold Omega* = 2(x + 3) over every input.
// The expected value is worked out in real arithmetic from the dB value and
// rounded to LLR units (one fractional bit), clamped to [0, 2^10 - 1].
module tb_omega_approx;
  logic signed [7:0] snr_db;
  logic [9:0] omega;
  int checks = 0, failures = 0;

  omega_approx dut (.snr_db, .omega);

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -128; v < 128; v++) begin
      real x, om;
      int exp_q;
      snr_db = 8'(v);
      #1;
      x = real'(v) / 2.0;            // dB
      om = 2.0 * (x + 3.0);          // LLR units
      exp_q = $rtoi(om * 2.0);       // one fractional bit, exact here
      if (exp_q < 0) exp_q = 0;
      if (exp_q > 1023) exp_q = 1023;
      checks++;
      if (int'(omega) != exp_q) begin
        failures++;
        $display("FAIL x=%0.1f dB omega=%0d expected %0d", x, omega, exp_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
