// pe_array -- PE parallel processing elements for the branch operations of
// successive-cancellation decoding.
//
// Each lane computes, for one pair of parent LLRs (a = L_i, b = L_{i+half}):
//   F (left branch):  sgn(a) sgn(b) min(|a|,|b|)
//   G (right branch): b + (1 - 2 beta_i) a
// which are the min-sum update rules of SC decoding. Results are saturated
// to the symmetric internal range [-LLR_MAX, LLR_MAX]. A left child that is a
// Rate-0 node is never decoded: its partial sums are zero, so the controller
// issues G straight away with the partial-sum memory still cleared (the
// Rate-0/G merge). The block is purely combinational; the controller
// registers the result into the LLR memory in the same cycle.
module pe_array
  import dscf_pkg::*;
#(
  parameter int PE = 64
) (
  input  logic           op_g,      // 0: F, 1: G
  input  llr_t [PE-1:0]  a,         // first half of the parent node
  input  llr_t [PE-1:0]  b,         // second half of the parent node
  input  logic [PE-1:0]  beta,      // left-child partial sums (G only)
  output llr_t [PE-1:0]  y
);
  always_comb begin
    for (int i = 0; i < PE; i++) begin
      logic [QI-1:0] ma, mb;
      logic signed [QI+1:0] sum;
      logic [QI-1:0] m;
      ma  = abs_llr(a[i]);
      mb  = abs_llr(b[i]);
      sum = '0;
      m   = (ma < mb) ? ma : mb;

      if (!op_g) begin
        y[i] = (a[i][QI-1] ^ b[i][QI-1]) ? llr_t'(-$signed({1'b0, m})) : llr_t'(m);
      end else begin
        sum = beta[i] ? ($signed({{2{b[i][QI-1]}}, b[i]}) - $signed({{2{a[i][QI-1]}}, a[i]}))
                      : ($signed({{2{b[i][QI-1]}}, b[i]}) + $signed({{2{a[i][QI-1]}}, a[i]}));
        y[i] = sat_llr(sum);
      end
    end
  end
endmodule
