// tb_spc_node: random SPC nodes of every size (4 .. 64 leaves).  Checks the
// even-parity decision, both thresholded flip subsets eta_1 and eta_2 (for
// odd and even hard-decision parity) and the outputs with each subset applied,
// against a model that orders the lanes by (|LLR|, index) with a full sort.
module tb_spc_node;
  localparam int P = 64, QI = 7, MAXV = 63;
  logic [P-1:0][QI-1:0] llr;
  logic [2:0] s;
  logic [9:0] omega;
  logic flip, sel;
  logic [1:0] cand;
  logic [P-1:0] beta;
  int checks = 0, failures = 0;
  int n_par[2];

  spc_node dut (.llr, .s, .omega, .flip, .sel, .beta, .cand);

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
    int ord[P];
    for (int it = 0; it < 2000; it++) begin
      int sz, m1, m2, m3;
      bit par;
      logic [P-1:0] eb;
      logic [1:0] ec;
      s = 3'(2 + $urandom % 5);
      sz = 1 << s;
      for (int i = 0; i < P; i++) begin
        v[i] = ($urandom % 2) ? int'($urandom % 11) - 5 : int'($urandom % (2 * MAXV + 1)) - MAXV;
        llr[i] = QI'(v[i]);
        ord[i] = i;
      end
      for (int a = 0; a < sz; a++)
        for (int b = a + 1; b < sz; b++) begin
          int ma, mb;
          ma = (v[ord[a]] < 0) ? -v[ord[a]] : v[ord[a]];
          mb = (v[ord[b]] < 0) ? -v[ord[b]] : v[ord[b]];
          if (mb < ma || (mb == ma && ord[b] < ord[a])) begin
            int t;
            t = ord[a]; ord[a] = ord[b]; ord[b] = t;
          end
        end
      m1 = (v[ord[0]] < 0) ? -v[ord[0]] : v[ord[0]];
      m2 = (v[ord[1]] < 0) ? -v[ord[1]] : v[ord[1]];
      m3 = (v[ord[2]] < 0) ? -v[ord[2]] : v[ord[2]];
      omega = 10'($urandom % 16);
      flip = $urandom & 1;
      sel = $urandom & 1;
      #1;
      eb = '0;
      par = 0;
      for (int i = 0; i < sz; i++) begin eb[i] = v[i] < 0; par ^= eb[i]; end
      n_par[par]++;
      ec[0] = par ? (m2 <= int'(omega)) : (m1 + m2 <= int'(omega));
      ec[1] = par ? (m3 <= int'(omega)) : (m1 + m3 <= int'(omega));
      if (!flip) begin
        if (par) eb[ord[0]] ^= 1;
      end else begin
        if (!par) eb[ord[0]] ^= 1;
        eb[sel ? ord[2] : ord[1]] ^= 1;
      end
      chk(cand == ec, $sformatf("cand it %0d got %b exp %b", it, cand, ec));
      chk(beta == eb, $sformatf("beta it %0d par %0d flip %0d sel %0d", it, par, flip, sel));
      chk(^beta == 1'b0, $sformatf("parity it %0d", it));
    end
    chk(n_par[0] > 0 && n_par[1] > 0, "both parities seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
