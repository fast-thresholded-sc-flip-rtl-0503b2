// tb_rep_node: random Rep nodes of every size.  Checks that the decision is
// the sign of the LLR sum on every lane of the node (0 outside), the flip
// candidate |sum| <= Omega, and the inverted decision when flipping.
module tb_rep_node;
  localparam int P = 64, QI = 7, MAXV = 63;
  logic [P-1:0][QI-1:0] llr;
  logic [2:0] s;
  logic [9:0] omega;
  logic flip, cand;
  logic [P-1:0] beta;
  int checks = 0, failures = 0;

  rep_node dut (.llr, .s, .omega, .flip, .beta, .cand);

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    int v[P];
    for (int it = 0; it < 2000; it++) begin
      int sz, sum, bias;
      logic [P-1:0] eb;
      s = 3'(1 + $urandom % 6);
      sz = 1 << s;
      bias = int'($urandom % 9) - 4;
      for (int i = 0; i < P; i++) begin
        v[i] = ($urandom % 2) ? bias + int'($urandom % 5) - 2 : int'($urandom % (2 * MAXV + 1)) - MAXV;
        if (it % 50 == 0) v[i] = (i % 2) ? MAXV : -MAXV;   // large sums, zero sum
        if (it % 50 == 1) v[i] = -MAXV;
        llr[i] = QI'(v[i]);
      end
      omega = 10'($urandom % 40);
      flip = $urandom & 1;
      #1;
      sum = 0;
      for (int i = 0; i < sz; i++) sum += v[i];
      eb = '0;
      for (int i = 0; i < sz; i++) eb[i] = (sum < 0) ^ flip;
      chk(beta == eb, $sformatf("beta it %0d sum %0d", it, sum));
      chk(cand == (((sum < 0) ? -sum : sum) <= int'(omega)), $sformatf("cand it %0d", it));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
