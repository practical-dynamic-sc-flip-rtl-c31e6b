// node_decoder -- one-cycle decoding of a special node from its top LLRs.
//
// For a node of size 2^s (s <= log2 PE) whose LLRs sit in lanes 0..2^s-1:
//   Rate-0 : beta = 0
//   Rate-1 : beta_i = HD(L_i)
//   Rep    : beta_i = HD(sum of all L_i) for every i
//   SPC    : beta_i = HD(L_i); if the parity gamma of the hard decisions is
//            odd, the bit with the smallest |L| (i_min) is inverted
// HD(L) = 1 when L < 0. When the node is in the current flip set (flip_en),
// the decision is flipped: every bit of a Rep node, bit idx1 of a Rate-1
// node, bits idx1 and idx2 of an SPC node. These rules follow the special
// node decoding and the bit-flipping rules of the paper. The message bits
// of the node are recovered as u = beta * G^{(x)s} (the polar transform is
// its own inverse). Lanes at or above the node size are don't-care.
// Purely combinational; i_min and gamma are also output for the metric.
module node_decoder
  import dscf_pkg::*;
#(
  parameter int PE = 64,
  localparam int LPE = $clog2(PE),
  localparam int SW  = $clog2(LPE + 1)
) (
  input  node_type_t      ntype,
  input  logic [SW-1:0]   stage,      // node size is 2^stage
  input  llr_t [PE-1:0]   llr,
  input  logic            flip_en,
  input  logic [IDX_W-1:0] idx1,
  input  logic [IDX_W-1:0] idx2,
  output logic [PE-1:0]   beta,
  output logic [PE-1:0]   u,
  output logic            gamma,
  output logic [IDX_W-1:0] imin
);
  logic [PE-1:0]  lane_on;
  logic [PE-1:0]  hd;
  logic signed [QI+LPE:0] rep_sum;

  always_comb begin
    logic [QI-1:0] best;
    for (int i = 0; i < PE; i++) begin
      lane_on[i] = (i < (1 << stage));
      hd[i]      = llr[i][QI-1];
    end
    gamma = ^(hd & lane_on);
    best  = '1;
    imin  = '0;
    rep_sum = '0;
    for (int i = 0; i < PE; i++) begin
      if (lane_on[i]) begin
        rep_sum = rep_sum + (QI+LPE+1)'(llr[i]);
        if (abs_llr(llr[i]) < best) begin
          best = abs_llr(llr[i]);
          imin = IDX_W'(i);
        end
      end
    end

    unique case (ntype)
      NT_R1:   beta = hd;
      NT_SPC:  beta = hd ^ (PE'(gamma) << imin);
      NT_REP:  beta = {PE{rep_sum < 0}};
      default: beta = '0;
    endcase
    if (flip_en) begin
      unique case (ntype)
        NT_REP:  beta = ~beta;
        NT_R1:   beta = beta ^ (PE'(1) << idx1);
        NT_SPC:  beta = beta ^ (PE'(1) << idx1) ^ (PE'(1) << idx2);
        default: ;
      endcase
    end
    beta = beta & lane_on;

    // u = beta G^{(x)s}: butterflies of the stages below the node size
    u = beta;
    for (int t = 0; t < LPE; t++)
      if (t < stage)
        for (int i = 0; i < PE; i++)
          if (((i >> t) & 1) == 0) u[i] = u[i] ^ u[i + (1 << t)];
  end
endmodule
