// psum_mem: in-place partial-sum (beta) store of the decoding tree.
//
// The partial sums of a node at stage s live at the positions of its 2^s
// leaves in one N-bit register.  Combining the left and right children into
// their parent follows the paper's rule beta_v = (beta_l xor beta_r, beta_r):
// the parent's second half already holds beta_r, so only the first half is
// updated, in place, by xor with the second half.  The left child's bits stay
// available for the right sibling's g computations until that combine.  When
// the root is combined the register holds the estimated codeword.  This
// in-place layout is this design's choice.
// Ports: `nw_*` writes a decoded node (2^s <= P bits, lanes 0 .. 2^s-1) at
// leaf position `nw_pos`; `cb_*` combines two stage-`cb_s` children into the
// parent starting at `cb_pos` (one cycle, any size); `rd_pos` reads the P
// bits starting at that leaf (asynchronous).  Node write and combine are never
// requested in the same cycle.
module psum_mem #(
  parameter int unsigned N    = ftscf_pkg::N_DEF,
  parameter int unsigned P    = ftscf_pkg::P_DEF,
  parameter int unsigned LOGN = $clog2(N),
  parameter int unsigned SW   = $clog2(LOGN + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             nw_en,
  input  logic [LOGN-1:0]  nw_pos,
  input  logic [SW-1:0]    nw_s,
  input  logic [P-1:0]     nw_data,
  input  logic             cb_en,
  input  logic [SW-1:0]    cb_s,
  input  logic [LOGN-1:0]  cb_pos,
  input  logic [LOGN-1:0]  rd_pos,
  output logic [P-1:0]     rd_data,
  output logic [N-1:0]     x_hat
);
  logic [N-1:0] ps, cb_next;
  logic [P-1:0] nw_mask;
  int unsigned  nw_c, nw_o;

  always_comb begin
    nw_c = int'(nw_pos) / P;
    nw_o = int'(nw_pos) % P;
    nw_mask = '0;
    for (int i = 0; i < P; i++)
      if (i < (1 << nw_s)) nw_mask[i] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ps <= '0;
    end else if (nw_en) begin
      ps[nw_c*P +: P] <= (ps[nw_c*P +: P] & ~(nw_mask << nw_o)) | ((nw_data & nw_mask) << nw_o);
    end else if (cb_en) begin
      ps <= cb_next;
    end
  end

  // Combined value of every bit: a bit in the first half of the parent takes
  // the xor with its partner 2^cb_s places higher; all others are unchanged.
  for (genvar p = 0; p < N; p++) begin : g_cb
    always_comb begin
      cb_next[p] = ps[p];
      for (int st = 0; st < LOGN; st++)
        if (int'(cb_s) == st && ((p >> st) & 1) == 0 &&
            (p >> (st + 1)) == (int'(cb_pos) >> (st + 1)) && p + (1 << st) < N)
          cb_next[p] = ps[p] ^ ps[(p + (1 << st)) % N];
    end
  end

  always_comb begin
    logic [2*P-1:0] two;
    int unsigned    c, o;
    c = int'(rd_pos) / P;
    o = int'(rd_pos) % P;
    two = {((c + 1) * P < N) ? ps[((c + 1) * P) % N +: P] : P'(0), ps[c*P +: P]};
    rd_data = P'(two >> o);
  end

  assign x_hat = ps;
endmodule
