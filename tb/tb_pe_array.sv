// tb_pe_array: random and corner-case test of the f and g processing elements
// against integer formulas: f = sgn(a) sgn(b) min(|a|,|b|),
// g = sat(b + (1 - 2 beta) a) with saturation to +-63 (7-bit LLRs).
module tb_pe_array;
  localparam int P = 64, QI = 7, MAXV = 63;
  logic op_g;
  logic [P-1:0][QI-1:0] a, b, y;
  logic [P-1:0] beta;
  int checks = 0, failures = 0;

  pe_array dut (.op_g, .a, .b, .beta, .y);

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd_llr();
    int r = $urandom % 8;
    if (r == 0) return MAXV;
    if (r == 1) return -MAXV;
    if (r == 2) return 0;
    return int'($urandom % (2 * MAXV + 1)) - MAXV;
  endfunction

  initial begin
    int av[P], bv[P];
    for (int it = 0; it < 400; it++) begin
      op_g = it[0];
      for (int i = 0; i < P; i++) begin
        av[i] = rnd_llr();
        bv[i] = rnd_llr();
        a[i] = QI'(av[i]);
        b[i] = QI'(bv[i]);
        beta[i] = $urandom & 1;
      end
      #1;
      for (int i = 0; i < P; i++) begin
        int e, got;
        if (!op_g) begin
          int ma, mb;
          ma = (av[i] < 0) ? -av[i] : av[i];
          mb = (bv[i] < 0) ? -bv[i] : bv[i];
          e = (ma < mb) ? ma : mb;
          if ((av[i] < 0) != (bv[i] < 0)) e = -e;
        end else begin
          e = bv[i] + (beta[i] ? -av[i] : av[i]);
          if (e > MAXV) e = MAXV;
          if (e < -MAXV) e = -MAXV;
        end
        got = int'(signed'(y[i]));
        checks++;
        if (got != e) begin
          failures++;
          if (failures < 10) $display("FAIL op_g=%0d a=%0d b=%0d beta=%0d y=%0d exp=%0d",
                                      op_g, av[i], bv[i], beta[i], got, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
