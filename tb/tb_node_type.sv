// tb_node_type: checks node classification, first on the PC(16,8) example
// tree (leaves 7, 9..15 non-frozen: Rate-0, Rep, SPC, Rate-1 at stage 2
// and u0-u7 / u8-u15 at stage 3 as Rep / SPC),
// then on random masks against a count-based model of the four patterns.
module tb_node_type;
  import ftscf_pkg::*;
  localparam int P = 16, LOGP = 4;
  logic [P-1:0] chunk;
  logic [LOGP-1:0] off;
  logic [4:0] s;
  node_kind_e kind;
  int checks = 0, failures = 0;

  node_type #(.P(P)) dut (.chunk, .off, .s, .kind);

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_kind(node_kind_e e, string what);
    #1;
    checks++;
    if (kind != e) begin
      failures++;
      $display("FAIL %s: got %s expected %s", what, kind.name(), e.name());
    end
  endtask

  function automatic node_kind_e model(logic [P-1:0] c, int o, int st);
    int sz, cnt;
    if (st > LOGP) return NODE_NONE;
    sz = 1 << st;
    cnt = 0;
    for (int i = 0; i < sz; i++) cnt += c[o + i];
    if (cnt == 0) return NODE_R0;
    if (cnt == sz) return NODE_R1;
    if (st >= 1 && cnt == 1 && c[o + sz - 1]) return NODE_REP;
    if (st >= 2 && cnt == sz - 1 && !c[o]) return NODE_SPC;
    return NODE_NONE;
  endfunction

  initial begin
    // PC(16,8) of the paper's example tree: non-frozen u7, u9..u15.
    chunk = 16'b1111_1110_1000_0000;
    s = 2;
    off = 0;  expect_kind(NODE_R0, "u0-u3");
    off = 4;  expect_kind(NODE_REP, "u4-u7");
    off = 8;  expect_kind(NODE_SPC, "u8-u11");
    off = 12; expect_kind(NODE_R1, "u12-u15");
    // One stage up the two halves are themselves Rep and SPC patterns.
    s = 3; off = 0; expect_kind(NODE_REP, "u0-u7");
    s = 3; off = 8; expect_kind(NODE_SPC, "u8-u15");
    s = 4; off = 0; expect_kind(NODE_NONE, "root");
    s = 5; off = 0; chunk = '1; expect_kind(NODE_NONE, "larger than P");
    for (int it = 0; it < 3000; it++) begin
      int st, o;
      st = $urandom % (LOGP + 1);
      o = ($urandom % (P >> st)) << st;
      // bias towards the special patterns
      case ($urandom % 5)
        0: chunk = '0;
        1: chunk = '1;
        2: chunk = P'(1) << (o + (1 << st) - 1);
        3: chunk = ~(P'(1) << o);
        default: chunk = P'($urandom);
      endcase
      if ($urandom % 2) chunk ^= P'(1) << ($urandom % P);
      s = 5'(st);
      off = LOGP'(o);
      expect_kind(model(chunk, o, st), $sformatf("random %0d", it));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
