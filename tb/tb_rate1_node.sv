// tb_rate1_node: random Rate-1 nodes of every size.  Checks the hard
// decisions, the flip candidate (smallest |LLR|, lowest index on ties, taken
// only when at most Omega) and the flipped output, against a sort-based model.
module tb_rate1_node;
  localparam int P = 64, QI = 7, MAXV = 63;
  logic [P-1:0][QI-1:0] llr;
  logic [2:0] s;
  logic [9:0] omega;
  logic flip, cand;
  logic [P-1:0] beta;
  logic [5:0] cand_idx;
  int checks = 0, failures = 0;

  rate1_node dut (.llr, .s, .omega, .flip, .beta, .cand, .cand_idx);

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
      int sz, best, bm;
      logic [P-1:0] eb;
      s = 3'($urandom % 7);
      sz = 1 << s;
      for (int i = 0; i < P; i++) begin
        v[i] = ($urandom % 3 == 0) ? int'($urandom % 9) - 4 : int'($urandom % (2 * MAXV + 1)) - MAXV;
        llr[i] = QI'(v[i]);
      end
      omega = 10'($urandom % 20);
      flip = $urandom & 1;
      #1;
      best = 0; bm = 1000;
      for (int i = 0; i < sz; i++) begin
        int m;
        m = (v[i] < 0) ? -v[i] : v[i];
        if (m < bm) begin bm = m; best = i; end
      end
      eb = '0;
      for (int i = 0; i < sz; i++) eb[i] = v[i] < 0;
      if (flip) eb[best] = ~eb[best];
      chk(beta == eb, $sformatf("beta it %0d", it));
      chk(cand == (bm <= int'(omega)), $sformatf("cand it %0d", it));
      chk(int'(cand_idx) == best, $sformatf("idx it %0d got %0d exp %0d", it, cand_idx, best));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
