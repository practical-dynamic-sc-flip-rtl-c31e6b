// findmin4 -- the four smallest LLR magnitudes of a node and their indices.
//
// Lanes 0..2^stage-1 are searched; results come out in increasing order of
// magnitude (ties broken towards the lower index), with valid[k] cleared when
// the node has fewer than k+1 lanes. Implemented as four successive
// minimum searches over the lanes not yet taken; purely combinational.
// The paper gives the function (findmin4() in the sorter datapath), the
// repeated-minimum structure is this design's choice.
module findmin4
  import dscf_pkg::*;
#(
  parameter int PE = 64,
  localparam int LPE = $clog2(PE),
  localparam int SW  = $clog2(LPE + 1)
) (
  input  logic [SW-1:0]          stage,
  input  logic [PE-1:0][QI-1:0]  mag,
  output logic [3:0][IDX_W-1:0]  idx,
  output logic [3:0][QI-1:0]     val,
  output logic [3:0]             valid
);
  always_comb begin
    logic [PE-1:0] taken;
    taken = '0;
    for (int k = 0; k < 4; k++) begin
      logic [QI:0] best;
      best     = '1;
      idx[k]   = '0;
      valid[k] = 1'b0;
      for (int i = 0; i < PE; i++)
        if (i < (1 << stage) && !taken[i] && {1'b0, mag[i]} < best) begin
          best     = {1'b0, mag[i]};
          idx[k]   = IDX_W'(i);
          valid[k] = 1'b1;
        end
      val[k] = best[QI-1:0];
      if (valid[k]) taken[idx[k]] = 1'b1;
    end
  end
endmodule
