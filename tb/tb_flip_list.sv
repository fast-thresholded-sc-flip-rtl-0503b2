// tb_flip_list: random single and double pushes, clears and reads of the
// flip-candidate list, checked against a queue model (order of appearance,
// entry 0 before entry 1, capacity T_max = 10, later entries dropped).
module tb_flip_list;
  import ftscf_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [1:0] push = 0;
  flip_cand_t [1:0] entry;
  logic [3:0] rd_idx = 0, count;
  flip_cand_t rd_entry;
  flip_cand_t q[$];
  int checks = 0, failures = 0, n_full = 0;

  flip_list dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    entry = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      clear = ($urandom % 40) == 0;
      push = 2'($urandom);
      for (int e = 0; e < 2; e++) begin
        entry[e].start = 16'($urandom);
        entry[e].sel = $urandom & 1;
      end
      @(posedge clk);
      if (clear) q.delete();
      else
        for (int e = 0; e < 2; e++)
          if (push[e] && q.size() < 10) q.push_back(entry[e]);
      if (q.size() == 10) n_full++;
      @(negedge clk);
      clear = 0; push = 0;
      checks++;
      if (int'(count) != q.size()) begin
        failures++; $display("FAIL count %0d model %0d", count, q.size());
      end
      for (int i = 0; i < q.size(); i++) begin
        rd_idx = 4'(i);
        #1;
        checks++;
        if (rd_entry != q[i]) begin failures++; $display("FAIL entry %0d", i); end
      end
    end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL list never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
