// node_type: identifies the special sub-codes of the decoding tree.
//
// A node at stage s covers 2^s consecutive leaves.  From the node's slice of
// the information mask (1 = non-frozen leaf) it reports Rate-0 (all frozen),
// Rate-1 (none frozen), Rep (only the last leaf non-frozen, s >= 1) or SPC
// (only the first leaf frozen, s >= 2), checked in that order; otherwise
// NODE_NONE and the decoder descends further.  These four patterns are the
// ones the paper decodes; the (0011) and (0101) patterns it also names are
// left to ordinary traversal.  Only nodes of at most P leaves (one LLR word)
// are treated as special, a limit chosen by this design; leaves (s = 0) are
// always Rate-0 or Rate-1.  `chunk` is the P-bit, P-aligned slice of the
// mask holding the node and `off` the node's offset in it.  Combinational.
module node_type #(
  parameter int unsigned P    = ftscf_pkg::P_DEF,
  parameter int unsigned LOGP = $clog2(P),
  parameter int unsigned SW   = 5   // width of the stage number
) (
  input  logic [P-1:0]     chunk,
  input  logic [LOGP-1:0]  off,
  input  logic [SW-1:0]    s,
  output ftscf_pkg::node_kind_e kind
);
  import ftscf_pkg::*;
  logic [P-1:0] bits, mask, last;

  always_comb begin
    kind = NODE_NONE;
    bits = '0; mask = '0; last = '0;
    if (int'(s) <= int'(LOGP)) begin
      for (int i = 0; i < P; i++)
        if (i < (1 << s)) mask[i] = 1'b1;
      last = P'(1) << ((1 << s) - 1);
      bits = (chunk >> off) & mask;
      if (bits == '0)                            kind = NODE_R0;
      else if (bits == mask)                     kind = NODE_R1;
      else if (s >= 1 && bits == last)           kind = NODE_REP;
      else if (s >= 2 && bits == (mask & ~P'(1))) kind = NODE_SPC;
    end
  end
endmodule
