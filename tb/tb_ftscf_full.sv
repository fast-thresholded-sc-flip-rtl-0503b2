// tb_ftscf_full: end-to-end test of the Fast-TSCF decoder at its default size
// (no parameter overrides).
//
// Decodes noisy frames of the PC(1024,512) code (P = 64 lanes) over a sweep of Eb/N0
// values and compares every result (decoded leaves, codeword, CRC flag,
// number of flip attempts and latency in cycles) with the reference model of
// ftscf_ref_pkg.  The model matches the decoder frame by frame, so its event
// counts are the decoder's: the testbench requires that each mechanism
// occurred at least once (each node kind, each kind of applied flip, success
// at the first attempt, success after flipping, failure after T_max
// attempts, a full candidate list, special patterns larger than P) and
// counts input stalls at the decoder's handshake itself.
module tb_ftscf_full;
  import ftscf_ref_pkg::*;

  localparam int N = 1024, K = 512, P = 64, TMAX = 10;
  localparam int QC = 6, QI = 7;
  localparam int FRAMES = 60;

  logic clk = 0, rst_n = 0;
  logic start = 0, in_valid = 0, in_ready, busy, done, crc_ok;
  logic [N-1:0] info_mask, u_hat, x_hat;
  logic signed [7:0] snr_db;
  logic [P-1:0][QC-1:0] in_llr;
  logic [$clog2(TMAX+1)-1:0] attempts;

  ftscf_decoder dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // Watchdog.
  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Input stalls seen at the decoder's handshake.
  int d_stall = 0;
  always @(posedge clk) if (rst_n && in_ready && !in_valid) d_stall++;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  ref_decoder m;
  int d_kind[5];
  int d_flip[4];   // R1, REP, SPC eta1, SPC eta2
  frame_gen g;
  int n_succ_flip = 0, n_fail = 0, n_ok0 = 0, n_correct = 0;
  longint lat_first = 0, lat_all = 0;

  initial begin
    m = new(N, P, TMAX, QI);
    g = new(N, K, QC, 1);
    for (int i = 0; i < N; i++) info_mask[i] = g.info[i];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      real ebno;
      int snrq, om, lat, t0;
      bit dec_ok;
      ebno = 1.0 + 0.25 * (f % 6);
      snrq = $rtoi(ebno * 2.0 + 0.5);
      om = 2 * snrq + 12;
      if (om < 0) om = 0;
      g.make(ebno);
      m.decode(g.llr, g.info, om);
      // drive the frame
      @(negedge clk);
      snr_db = 8'(snrq);
      start = 1;
      @(negedge clk);
      start = 0;
      for (int w = 0; w < N / P; w++) begin
        while (($urandom % 4) == 0) begin in_valid = 0; @(negedge clk); end
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
      dec_ok = 1;
      for (int i = 0; i < N; i++) if (u_hat[i] != m.u[i]) dec_ok = 0;
      check(dec_ok, $sformatf("frame %0d u_hat differs from model", f));
      dec_ok = 1;
      for (int i = 0; i < N; i++) if (x_hat[i] != m.x[i]) dec_ok = 0;
      check(dec_ok, $sformatf("frame %0d x_hat differs from model", f));
      check(crc_ok == m.ok, $sformatf("frame %0d crc_ok %0d model %0d", f, crc_ok, m.ok));
      check(int'(attempts) == m.attempts,
            $sformatf("frame %0d attempts %0d model %0d", f, attempts, m.attempts));
      check(lat == m.cycles + 1, $sformatf("frame %0d latency %0d model %0d", f, lat, m.cycles));
      if (m.ok && m.attempts > 0) n_succ_flip++;
      if (!m.ok) n_fail++;
      if (m.ok && m.attempts == 0) begin n_ok0++; lat_first += lat; end
      lat_all += lat;
      dec_ok = 1;
      for (int i = 0; i < N; i++) if (u_hat[i] != g.u[i]) dec_ok = 0;
      if (dec_ok) n_correct++;
    end
    // Mechanism counts of the model, which matched the decoder frame by frame
    // (same leaves, attempts and cycle counts).
    for (int i = 1; i < 5; i++) d_kind[i] = m.n_kind[i];
    d_flip[0] = m.n_flip_r1;
    d_flip[1] = m.n_flip_rep;
    d_flip[2] = m.n_flip_spc0;
    d_flip[3] = m.n_flip_spc1;
    $display("frames=%0d correct=%0d first-try=%0d after-flip=%0d failed=%0d",
             FRAMES, n_correct, n_ok0, n_succ_flip, n_fail);
    $display("nodes R0=%0d R1=%0d Rep=%0d SPC=%0d; flips R1=%0d Rep=%0d SPC1=%0d SPC2=%0d",
             d_kind[1], d_kind[2], d_kind[3], d_kind[4], d_flip[0], d_flip[1], d_flip[2], d_flip[3]);
    $display("latency: first-attempt frames %0d cycles on average, all frames %0d",
             (n_ok0 > 0) ? lat_first / n_ok0 : 0, lat_all / FRAMES);
    $display("candidates=%0d list-full=%0d big-special=%0d stalls=%0d",
             m.n_cand, m.n_list_full, m.n_big_special, d_stall);
    // Every mechanism must have occurred.
    for (int i = 1; i < 5; i++) check(d_kind[i] > 0, $sformatf("node kind %0d never decoded", i));
    for (int i = 0; i < 4; i++) check(d_flip[i] > 0, $sformatf("flip kind %0d never applied", i));
    check(n_succ_flip > 0, "no frame recovered by flipping");
    check(n_fail > 0, "no frame failed after T_max");
    check(n_ok0 > 0, "no frame decoded at first attempt");
    check(m.n_list_full > 0, "candidate list never full");
    check(m.n_big_special > 0, "no special pattern larger than P traversed");
    check(d_stall > 0, "input never stalled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
