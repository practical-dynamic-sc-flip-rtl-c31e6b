// metric_gen -- decision metric generator of the Fast-DSCF sorter datapath.
//
// Every decoded (non Rate-0) node presents its top LLRs L for one cycle
// (node_valid). Two paths run in parallel:
//   * accumulative part M'': f*(|x|) (3/2 if |x| <= 5, else 0) is applied to
//     the node's magnitudes and summed -- all lanes of a Rate-1 node, |sum L|
//     of a Rep node, |L_i| + (1-2 gamma)|L_imin| for the lanes i != i_min of
//     an SPC node -- and added to the M'' register. With the paper's
//     normalisation M'' restarts from 0 in every attempt (clr) and is only
//     updated after the last flipped node (accum_en).
//   * instantaneous part M': findmin4() picks the four smallest |L|; a Rate-1
//     node yields 2 candidates (|L| of the two smallest, search span 2), a
//     Rep node one (|sum L|), an SPC node the 6 pairs of the four smallest
//     (search span 4) with M' = |L_a| + |L_b| - 2 gamma |L_imin|.
// The candidates are presorted by M', M'' (including this node) is added
// and join() attaches the current flip set lambda_0 extended by the new flip
// (order w+1). Up to six candidates leave per node; their valid bits are
// cleared unless gen_en (w < omega and node after the last flip).
// Which M'' value a candidate inside the same node sees (here: updated with
// the node's own f* terms, as the metric sums f over j <= i_w) and the
// node-granular "after the last flip" rule are this design's reading of
// the paper. Candidate outputs are combinational; M'' is registered.
module metric_gen
  import dscf_pkg::*;
#(
  parameter int PE = 64,
  localparam int LPE = $clog2(PE),
  localparam int SW  = $clog2(LPE + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,          // start of a decoding attempt
  input  logic              node_valid,
  input  node_type_t        ntype,
  input  logic [SW-1:0]     stage,
  input  llr_t [PE-1:0]     llr,
  input  logic [NODE_W-1:0] node_id,
  input  logic              accum_en,     // node lies after the last flip
  input  logic              gen_en,       // candidates wanted for this node
  input  elem_t             cur,          // current flip set (lambda_0)
  output elem_t [5:0]       cand,         // ascending metric, valid first
  output metric_t           m2            // M'' register
);
  localparam int WW = QM + 9;

  logic [PE-1:0][QI-1:0] mag;
  logic [PE-1:0]         lane_on;
  logic [3:0][IDX_W-1:0] midx;
  logic [3:0][QI-1:0]    mval;
  logic [3:0]            mvalid;
  logic                  gamma;
  logic [WW-1:0]         sumf;
  metric_t               m2_new;

  typedef struct packed {
    logic              valid;
    logic [WW-1:0]     m;
    logic [IDX_W-1:0]  i1;
    logic [IDX_W-1:0]  i2;
  } mp_t;
  mp_t [5:0] raw, srt;

  always_comb
    for (int i = 0; i < PE; i++) begin
      mag[i]     = abs_llr(llr[i]);
      lane_on[i] = (i < (1 << stage));
    end

  findmin4 #(.PE(PE)) u_findmin4 (
    .stage (stage), .mag (mag), .idx (midx), .val (mval), .valid (mvalid)
  );

  always_comb begin
    logic signed [QI+LPE:0] rep_sum;
    logic [QI+LPE:0]        rep_mag;
    logic [QI:0]            arg;
    rep_sum = '0;
    gamma   = 1'b0;
    for (int i = 0; i < PE; i++)
      if (lane_on[i]) begin
        rep_sum = rep_sum + (QI+LPE+1)'(llr[i]);
        gamma   = gamma ^ llr[i][QI-1];
      end
    rep_mag = rep_sum[QI+LPE] ? (QI+LPE+1)'(-rep_sum) : (QI+LPE+1)'(rep_sum);

    // ---- accumulative part: sum of f*() over the node
    sumf = '0;
    unique case (ntype)
      NT_R1:
        for (int i = 0; i < PE; i++)
          if (lane_on[i]) sumf = sumf + WW'(fstar((QI+9)'(mag[i])));
      NT_REP:
        sumf = WW'(fstar((QI+9)'(rep_mag)));
      NT_SPC:
        for (int i = 0; i < PE; i++)
          if (lane_on[i] && IDX_W'(i) != midx[0]) begin
            arg  = gamma ? ({1'b0, mag[i]} - {1'b0, mval[0]})
                         : ({1'b0, mag[i]} + {1'b0, mval[0]});
            sumf = sumf + WW'(fstar((QI+9)'(arg)));
          end
      default: sumf = '0;
    endcase
    m2_new = accum_en ? sat_met((QM+9)'(m2) + (QM+9)'(sumf)) : m2;

    // ---- instantaneous part M'
    raw = '0;
    unique case (ntype)
      NT_R1: begin
        raw[0] = '{valid: mvalid[0], m: WW'(mval[0]), i1: midx[0], i2: '0};
        raw[1] = '{valid: mvalid[1], m: WW'(mval[1]), i1: midx[1], i2: '0};
      end
      NT_REP:
        raw[0] = '{valid: 1'b1, m: WW'(rep_mag), i1: '0, i2: '0};
      NT_SPC: begin
        int p;
        p = 0;
        for (int a = 0; a < 4; a++)
          for (int b = a + 1; b < 4; b++) begin
            raw[p].valid = mvalid[a] & mvalid[b];
            raw[p].m     = WW'(mval[a]) + WW'(mval[b]) - (gamma ? WW'({mval[0], 1'b0}) : '0);
            raw[p].i1    = midx[a];
            raw[p].i2    = midx[b];
            p++;
          end
      end
      default: ;
    endcase

    // ---- presort(): stable insertion sort of the 6 candidates by M'
    srt = raw;
    for (int i = 1; i < 6; i++)
      for (int j = 5; j >= 1; j--)
        if (j <= i && srt[j].valid && (!srt[j-1].valid || srt[j].m < srt[j-1].m)) begin
          mp_t t;
          t = srt[j]; srt[j] = srt[j-1]; srt[j-1] = t;
        end

    // ---- join(): add M'' and attach the current flip set
    for (int c = 0; c < 6; c++) begin
      cand[c]        = '0;
      cand[c].valid  = srt[c].valid & node_valid & gen_en;
      cand[c].order  = cur.order + 1'b1;
      cand[c].metric = sat_met((QM+9)'(m2_new) + (QM+9)'(srt[c].m));
      cand[c].flips  = cur.flips;
      for (int e = 0; e < OMEGA; e++)
        if (e == int'(cur.order))
          cand[c].flips[e] = '{node: node_id, idx1: srt[c].i1, idx2: srt[c].i2};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      m2 <= '0;
    else if (clr)                    m2 <= '0;
    else if (node_valid && accum_en) m2 <= m2_new;
  end
endmodule
