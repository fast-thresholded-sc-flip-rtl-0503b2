// flip_list: bit-flip candidate list, kept in order of appearance.
//
// During the first decoding attempt the node decoders report flip candidates
// (at most two per cycle, from an SPC node).  The paper's decoder stores the
// candidates in the order they appear in the codeword instead of sorting them
// by LLR magnitude, so the insertion sorter of the Fast-SCF baseline is not
// needed; this list is that store.  Entries beyond DEPTH are dropped, since
// at most DEPTH (= T_max) extra attempts are made.  Pushing both entries in
// one cycle stores entry 0 before entry 1.  `clear` empties the list.
// Reads are asynchronous; writes take effect at the clock edge.
module flip_list #(
  parameter int unsigned DEPTH = ftscf_pkg::TMAX_DEF,
  parameter int unsigned CW    = $clog2(DEPTH + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic [1:0]                    push,
  input  ftscf_pkg::flip_cand_t [1:0]   entry,
  input  logic [CW-1:0]                 rd_idx,
  output ftscf_pkg::flip_cand_t         rd_entry,
  output logic [CW-1:0]                 count
);
  ftscf_pkg::flip_cand_t mem [DEPTH];

  // Slot written by each entry (DEPTH = none) and the count after the pushes.
  logic [1:0][CW:0] slot;
  logic [CW:0]      nxt;

  always_comb begin
    nxt = (CW+1)'(count);
    for (int e = 0; e < 2; e++) begin
      slot[e] = (CW+1)'(DEPTH);
      if (push[e] && nxt < (CW+1)'(DEPTH)) begin
        slot[e] = nxt;
        nxt     = nxt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
    end else if (clear) begin
      count <= '0;
    end else begin
      count <= nxt[CW-1:0];
    end
  end

  always_ff @(posedge clk)
    if (!clear)
      for (int e = 0; e < 2; e++)
        if (slot[e] < (CW+1)'(DEPTH)) mem[slot[e][CW-1:0]] <= entry[e];

  assign rd_entry = (rd_idx < CW'(DEPTH)) ? mem[rd_idx] : '0;
endmodule
