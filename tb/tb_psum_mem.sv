// tb_psum_mem: random node writes, combines and reads of the partial-sum
// store (N = 128, P = 16), checked against a model that applies
// beta_parent = (beta_l xor beta_r, beta_r) on a plain bit array.
module tb_psum_mem;
  localparam int N = 128, P = 16, LOGN = 7, LOGP = 4;
  logic clk = 0, rst_n = 0;
  logic nw_en = 0, cb_en = 0;
  logic [LOGN-1:0] nw_pos = 0, cb_pos = 0, rd_pos = 0;
  logic [2:0] nw_s = 0, cb_s = 0;
  logic [P-1:0] nw_data = 0, rd_data;
  logic [N-1:0] x_hat;
  bit model [N];
  int checks = 0, failures = 0;

  psum_mem #(.N(N), .P(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) model[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      int op, s, pos;
      @(negedge clk);
      nw_en = 0; cb_en = 0;
      op = $urandom % 2;
      if (op == 0) begin
        s = $urandom % (LOGP + 1);
        pos = ($urandom % (N >> s)) << s;
        nw_en = 1; nw_s = 3'(s); nw_pos = LOGN'(pos); nw_data = P'($urandom);
        for (int i = 0; i < (1 << s); i++) model[pos + i] = nw_data[i];
      end else begin
        s = $urandom % LOGN;                    // child stage
        pos = ($urandom % (N >> (s + 1))) << (s + 1);
        cb_en = 1; cb_s = 3'(s); cb_pos = LOGN'(pos);
        for (int i = 0; i < (1 << s); i++) model[pos + i] ^= model[pos + i + (1 << s)];
      end
      @(negedge clk);
      nw_en = 0; cb_en = 0;
      rd_pos = LOGN'($urandom % N);
      #1;
      checks++;
      for (int i = 0; i < N; i++)
        if (x_hat[i] != model[i]) begin
          failures++;
          $display("FAIL it %0d op %0d bit %0d", it, op, i);
          break;
        end
      checks++;
      for (int i = 0; i < P && int'(rd_pos) + i < N; i++)
        if (rd_data[i] != model[int'(rd_pos) + i]) begin
          failures++;
          $display("FAIL read at %0d lane %0d", rd_pos, i);
          break;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
