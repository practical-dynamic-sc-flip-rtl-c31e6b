// node_classifier -- derives the decoding instruction of every node of the
// SC decoding tree from the frozen set.
//
// Nodes are numbered heap-style: the root is 1 and node h has children 2h
// and 2h+1, so node k of stage s (size 2^s) is 2^(n-s) + k and leaf i is
// N + i. Leaves are Rate-1 (information bit) or Rate-0 (frozen bit). A node
// is then classified bottom-up from its two children:
//   Rate-0 = Rate-0 + Rate-0          Rate-1 = Rate-1 + Rate-1
//   Rep    = Rate-0 + Rep             (a size-2 Rep is Rate-0 + info leaf)
//   SPC    = SPC/Rep-of-size-2 + Rate-1 (first bit frozen, rest information)
// and anything else is a generic node whose children are visited. The four
// special node types are the ones the decoder supports; deriving them on
// chip from an information-bit mask, rather than from an instruction list
// prepared off line, is this design's choice. The logic is combinational
// and only depends on info_mask, which is meant to be static per code.
module node_classifier
  import dscf_pkg::*;
#(
  parameter int N = 1024
) (
  input  logic [N-1:0]  info_mask,           // 1 = information bit
  output node_type_t    types [2*N]          // index 0 unused
);
  localparam int NL = $clog2(N);

  function automatic node_type_t combine(input node_type_t l, input node_type_t r,
                                         input int s);
    if (l == NT_R0 && r == NT_R0)                          return NT_R0;
    else if (l == NT_R1 && r == NT_R1)                     return NT_R1;
    else if (l == NT_R0 && (r == NT_REP || (s == 1 && r == NT_R1)))
                                                           return NT_REP;
    else if (r == NT_R1 && (l == NT_SPC || (s == 2 && l == NT_REP)))
                                                           return NT_SPC;
    else                                                   return NT_GEN;
  endfunction

  // one level of the tree per stage s, node k of stage s in g_st[s].t[k]
  for (genvar s = 0; s <= NL; s++) begin : g_st
    node_type_t t [N >> s];
    for (genvar k = 0; k < (N >> s); k++) begin : g_node
      if (s == 0) begin : g_leaf
        assign t[k] = info_mask[k] ? NT_R1 : NT_R0;
      end else begin : g_inner
        assign t[k] = combine(g_st[s-1].t[2*k], g_st[s-1].t[2*k+1], s);
      end
      assign types[(1 << (NL - s)) + k] = t[k];
    end
  end
  assign types[0] = NT_GEN;
endmodule
