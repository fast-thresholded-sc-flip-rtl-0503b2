// ftscf_code_runner: decodes FRAMES noisy frames of one PC(N,K) code on its
// own Fast-TSCF decoder instance and checks each against the reference model.
//
// Eb/N0 steps from EBNO0 by EBNO_STEP dB over NSTEP points, one frame per
// point in turn.  K counts the 16 CRC bits.  Per frame it checks the decoded
// leaves, the codeword, the CRC flag, the number of flip attempts and the
// latency against ftscf_ref_pkg::ref_decoder.  Results are reported on the
// output ports when `finished` rises; a short summary line is printed.
module ftscf_code_runner #(
  parameter int  N         = 256,
  parameter int  K         = 128,
  parameter int  P         = 64,
  parameter int  FRAMES    = 20,
  parameter real EBNO0     = 1.0,
  parameter real EBNO_STEP = 0.5,
  parameter int  NSTEP     = 4
) (
  output int checks,
  output int failures,
  output int n_flip_ok,
  output bit finished
);
  import ftscf_ref_pkg::*;
  localparam int QC = 6, QI = 7, TMAX = 10;

  logic clk = 0, rst_n = 0;
  logic start = 0, in_valid = 0, in_ready, busy, done, crc_ok;
  logic [N-1:0] info_mask, u_hat, x_hat;
  logic signed [7:0] snr_db;
  logic [P-1:0][QC-1:0] in_llr;
  logic [$clog2(TMAX+1)-1:0] attempts;

  ftscf_decoder #(.N(N), .P(P), .TMAX(TMAX)) dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL PC(%0d,%0d): %s", N, K, what);
    end
  endtask

  ref_decoder m;
  frame_gen g;

  initial begin
    int n_ok = 0, n_att = 0;
    checks = 0; failures = 0; n_flip_ok = 0; finished = 0;
    m = new(N, P, TMAX, QI);
    g = new(N, K, QC, 1);
    for (int i = 0; i < N; i++) info_mask[i] = g.info[i];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      real ebno;
      int snrq, om, lat, t0;
      bit same;
      ebno = EBNO0 + EBNO_STEP * (f % NSTEP);
      snrq = $rtoi(ebno * 2.0 + 0.5);
      om = 2 * snrq + 12;
      if (om < 0) om = 0;
      g.make(ebno);
      m.decode(g.llr, g.info, om);
      @(negedge clk);
      snr_db = 8'(snrq);
      start = 1;
      @(negedge clk);
      start = 0;
      t0 = 0;
      for (int w = 0; w < N / P; w++) begin
        in_valid = 1;
        for (int i = 0; i < P; i++) in_llr[i] = QC'(g.llr[w * P + i]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        t0 = cyc;
        @(negedge clk);
      end
      in_valid = 0;
      while (!done) @(posedge clk);
      lat = cyc - t0;  // edges from the last input word to done, inclusive
      #1;
      same = 1;
      for (int i = 0; i < N; i++) if (u_hat[i] != m.u[i] || x_hat[i] != m.x[i]) same = 0;
      check(same, $sformatf("frame %0d leaves or codeword differ", f));
      check(crc_ok == m.ok, $sformatf("frame %0d crc_ok", f));
      check(int'(attempts) == m.attempts, $sformatf("frame %0d attempts", f));
      check(lat == m.cycles + 1, $sformatf("frame %0d latency %0d model %0d", f, lat, m.cycles));
      if (m.ok) n_ok++;
      if (m.ok && m.attempts > 0) n_flip_ok++;
      n_att += m.attempts;
    end
    $display("PC(%0d,%0d): %0d frames, CRC passed %0d (%0d after flipping), %0d flip attempts",
             N, K, FRAMES, n_ok, n_flip_ok, n_att);
    finished = 1;
  end
endmodule
