// llr_mem: LLR memory of the decoder, one P-lane word per address.
//
// Holds the channel LLRs (stage n) and the LLRs of the one node per stage
// that the depth-first traversal keeps alive.  A stage whose node has 2^s
// >= P LLRs takes 2^s/P words; smaller stages take one word, lanes
// 0 .. 2^s-1.  For N = 1024, P = 64 that is 37 words of 64 x 7 bits.  One
// synchronous write port and two asynchronous read ports, so the two halves
// of a parent node can be read in the same cycle.  The paper names the
// memories but not their organisation, which is this design's choice.
module llr_mem #(
  parameter int unsigned P     = ftscf_pkg::P_DEF,
  parameter int unsigned QI    = ftscf_pkg::QI_DEF,
  parameter int unsigned DEPTH = 37,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [AW-1:0]         waddr,
  input  logic [P-1:0][QI-1:0]  wdata,
  input  logic [AW-1:0]         raddr0,
  input  logic [AW-1:0]         raddr1,
  output logic [P-1:0][QI-1:0]  rdata0,
  output logic [P-1:0][QI-1:0]  rdata1
);
  logic [P-1:0][QI-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata0 = mem[raddr0];
  assign rdata1 = mem[raddr1];
endmodule
