// tb_llr_mem: random writes and dual-port reads of the LLR memory, checked
// against an array model; every word is written before it is read.
module tb_llr_mem;
  localparam int P = 64, QI = 7, DEPTH = 37;
  logic clk = 0, we = 0;
  logic [5:0] waddr = 0, raddr0 = 0, raddr1 = 0;
  logic [P-1:0][QI-1:0] wdata, rdata0, rdata1;
  logic [P*QI-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  llr_mem dut (.clk, .we, .waddr, .wdata, .raddr0, .raddr1, .rdata0, .rdata1);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [P*QI-1:0] rnd_word();
    logic [P*QI-1:0] w;
    for (int i = 0; i < P * QI; i += 32) w[i +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    // fill every word
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a); wdata = rnd_word(); model[a] = wdata;
    end
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      we = $urandom & 1;
      waddr = 6'($urandom % DEPTH);
      wdata = rnd_word();
      raddr0 = 6'($urandom % DEPTH);
      raddr1 = 6'($urandom % DEPTH);
      #1;
      checks += 2;
      if (rdata0 != model[raddr0]) begin failures++; $display("FAIL port 0 addr %0d", raddr0); end
      if (rdata1 != model[raddr1]) begin failures++; $display("FAIL port 1 addr %0d", raddr1); end
      @(posedge clk);
      if (we) model[waddr] = wdata;
    end
    we = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
