// tb_ftscf_codes: the codes of the paper's threshold-approximation study on
// decoder instances of matching length, all with P = 64 lanes (PC(64,16)
// therefore also exercises the N = P corner).  Each runner decodes frames
// over the Eb/N0 range where the study reports error rates and compares every
// frame with the reference model.  PC(64,16) carries only its 16 CRC bits
// (K counts the CRC), so its message is empty.  At least one code must
// recover a frame by flipping.
module tb_ftscf_codes;
  int c[6], f[6], fl[6];
  bit d[6];
  int checks = 0, failures = 0;

  ftscf_code_runner #(.N(64),   .K(16),  .FRAMES(24), .EBNO0(2.0), .EBNO_STEP(2.0), .NSTEP(4))
    r0 (.checks(c[0]), .failures(f[0]), .n_flip_ok(fl[0]), .finished(d[0]));
  ftscf_code_runner #(.N(256),  .K(208), .FRAMES(24), .EBNO0(3.0), .EBNO_STEP(1.0), .NSTEP(4))
    r1 (.checks(c[1]), .failures(f[1]), .n_flip_ok(fl[1]), .finished(d[1]));
  ftscf_code_runner #(.N(512),  .K(256), .FRAMES(24), .EBNO0(1.0), .EBNO_STEP(0.5), .NSTEP(4))
    r2 (.checks(c[2]), .failures(f[2]), .n_flip_ok(fl[2]), .finished(d[2]));
  ftscf_code_runner #(.N(512),  .K(128), .FRAMES(24), .EBNO0(0.0), .EBNO_STEP(0.5), .NSTEP(4))
    r3 (.checks(c[3]), .failures(f[3]), .n_flip_ok(fl[3]), .finished(d[3]));
  ftscf_code_runner #(.N(1024), .K(192), .FRAMES(24), .EBNO0(0.0), .EBNO_STEP(0.5), .NSTEP(4))
    r4 (.checks(c[4]), .failures(f[4]), .n_flip_ok(fl[4]), .finished(d[4]));
  ftscf_code_runner #(.N(256),  .K(128), .FRAMES(24), .EBNO0(2.0), .EBNO_STEP(0.5), .NSTEP(4))
    r5 (.checks(c[5]), .failures(f[5]), .n_flip_ok(fl[5]), .finished(d[5]));

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int flips = 0;
    wait (d[0] && d[1] && d[2] && d[3] && d[4] && d[5]);
    for (int i = 0; i < 6; i++) begin
      checks += c[i];
      failures += f[i];
      flips += fl[i];
    end
    checks++;
    if (flips == 0) begin failures++; $display("FAIL no frame recovered by flipping"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
