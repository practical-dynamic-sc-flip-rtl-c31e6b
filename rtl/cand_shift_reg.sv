// cand_shift_reg -- buffer between the metric generator and the sorter.
//
// A decoded node produces up to six presorted candidates at once, but the
// insertion sorter accepts three per cycle. The register loads all six
// (load) and presents them as two groups of three on consecutive cycles:
// first the three smallest, then the next three. Each group is itself in
// ascending order, which is what the sorter needs. Since at least one branch
// operation separates two decoded nodes, the register is always empty again
// when the next load arrives (checked by an assertion). A group whose
// elements are all invalid is skipped. out_valid marks a group on out.
module cand_shift_reg
  import dscf_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  elem_t [5:0]  in,
  output logic         out_valid,
  output elem_t [2:0]  out,
  output logic         empty
);
  elem_t [5:0] slot;
  logic  [5:0] has;

  always_comb begin
    for (int i = 0; i < 6; i++) has[i] = slot[i].valid;
    out       = slot[2:0];
    out_valid = |has[2:0];
    empty     = ~|has;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot <= '0;
    end else if (load) begin
      slot <= in;
    end else begin
      slot[2:0] <= slot[5:3];
      slot[5:3] <= '0;
    end
  end

  // a new node must not arrive before the previous candidates have left
  assert property (@(posedge clk) disable iff (!rst_n) load |-> ~|has[5:3]);
endmodule
