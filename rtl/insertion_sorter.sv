// insertion_sorter -- ordered list of bit-flipping candidates.
//
// Holds SLEN elements lambda_0 .. lambda_{SLEN-1} in ascending metric order,
// invalid elements at the end. lambda_0 is the flip set of the attempt in
// progress. Operations (one per cycle):
//   init    : lambda_0 = {order 0, metric 0, no flips}, all others invalid
//   insert  : merge up to three new, ascending elements; an old element
//             moves back by the number of new elements with a strictly
//             smaller metric (so it moves at most three places), a new
//             element lands behind every old one with an equal or smaller
//             metric. Elements pushed past the end are dropped (dropped
//             counts them). Since new metrics are never below 0 = lambda_0's
//             metric, lambda_0 keeps its place.
//   shift   : at the start of an additional attempt every element moves
//             forward one place and lambda_1's metric is subtracted from all
//             metrics, so that the new lambda_0 has metric 0 and the list is
//             normalised to it.
// The three-place back shift, the forward shift and the normalisation
// follow the paper's insertion sorter; the tie rule is this design's.
module insertion_sorter
  import dscf_pkg::*;
#(
  parameter int SLEN = 50
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               init,
  input  logic               insert,
  input  elem_t [2:0]        new_el,
  input  logic               shift,
  output elem_t [SLEN-1:0]   lam,
  output logic [1:0]         dropped
);
  elem_t [SLEN-1:0] ins_nxt;
  elem_t [SLEN-1:0] sh_nxt;

  // insertion network
  always_comb begin
    int unsigned cnt;
    logic [1:0] ndrop;
    ins_nxt = '0;
    ndrop   = '0;
    // old elements
    for (int i = 0; i < SLEN; i++) begin
      cnt = 0;
      for (int j = 0; j < 3; j++)
        if (new_el[j].valid && new_el[j].metric < lam[i].metric) cnt++;
      if (lam[i].valid) begin
        if (i + int'(cnt) < SLEN) ins_nxt[i + int'(cnt)] = lam[i];
        else ndrop = ndrop + 1'b1;
      end
    end
    // new elements
    for (int j = 0; j < 3; j++) begin
      cnt = 0;
      for (int i = 0; i < SLEN; i++)
        if (lam[i].valid && lam[i].metric <= new_el[j].metric) cnt++;
      if (new_el[j].valid) begin
        if (j + int'(cnt) < SLEN) ins_nxt[j + int'(cnt)] = new_el[j];
        else ndrop = ndrop + 1'b1;
      end
    end
    dropped = insert ? ndrop : 2'd0;
  end

  // forward shift with normalisation by the new lambda_0
  always_comb begin
    for (int i = 0; i < SLEN; i++) begin
      if (i + 1 < SLEN) begin
        sh_nxt[i] = lam[i + 1];
        sh_nxt[i].metric = lam[i + 1].metric - lam[1].metric;
      end else begin
        sh_nxt[i] = '0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lam <= '0;
    end else if (init) begin
      lam <= '0;
      lam[0].valid <= 1'b1;
    end else if (shift) begin
      lam <= sh_nxt;
    end else if (insert) begin
      lam <= ins_nxt;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(shift && insert));
endmodule
