// tb_crc_check: CRC-16 (0x1021) check over the non-frozen leaves.  Frames
// whose last 16 information bits carry the CRC of the others must pass; the
// same frames with one information bit flipped must fail; a flipped frozen bit
// must not matter.  The latency from start to done must be N/P cycles.
module tb_crc_check;
  localparam int N = 1024, P = 64;
  logic clk = 0, rst_n = 0, start = 0, busy, done, ok;
  logic [N-1:0] u, info;
  int checks = 0, failures = 0;

  crc_check dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(output bit res, output int lat);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    res = ok;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 40; f++) begin
      int kinfo, cnt, lat, pos;
      bit [15:0] c;
      bit res;
      int ipos[$];
      // random information set of random size
      info = '0;
      ipos.delete();
      for (int i = 0; i < N; i++) if ($urandom % 3 != 0) info[i] = 1;
      kinfo = 0;
      for (int i = 0; i < N; i++) if (info[i]) begin kinfo++; ipos.push_back(i); end
      u = '0;
      c = 0; cnt = 0;
      for (int i = 0; i < N; i++) begin
        if (!info[i]) u[i] = $urandom & 1;   // frozen values are ignored
        else if (cnt < kinfo - 16) begin
          bit fb;
          u[i] = $urandom & 1;
          fb = c[15] ^ u[i];
          c = {c[14:0], 1'b0} ^ (fb ? 16'h1021 : 16'h0);
          cnt++;
        end else begin
          u[i] = c[15 - (cnt - (kinfo - 16))];
          cnt++;
        end
      end
      run(res, lat);
      chk(res == 1, $sformatf("frame %0d valid CRC not accepted", f));
      chk(lat == N / P + 1, $sformatf("latency %0d", lat));
      pos = ipos[$urandom % ipos.size()];
      u[pos] = ~u[pos];
      run(res, lat);
      chk(res == 0, $sformatf("frame %0d corrupted bit %0d accepted", f, pos));
      u[pos] = ~u[pos];
      for (int i = 0; i < N; i++) if (!info[i]) begin u[i] = ~u[i]; break; end
      run(res, lat);
      chk(res == 1, $sformatf("frame %0d frozen bit changed result", f));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
