// psum_mem -- partial-sum (beta) memory and decoded-bit store.
//
// The partial sums are kept in codeword position order: the beta vector of a
// node at stage s with index k occupies bits k*2^s .. (k+1)*2^s - 1. A
// decoded node writes its beta in place; when a right child completes, its
// parent's beta  (beta_l XOR beta_r, beta_r)  is formed in place by XOR-ing
// the right half into the left half (eq. (3) of SC decoding), PE bits per
// cycle. A second array holds the estimated message bits u-hat at the same
// positions. Both arrays are organised as N/PE rows of PE bits.
//
// Ports: clr clears both arrays (start of every decoding attempt, so that
// Rate-0 nodes, which are never written, read as zero). wr_* writes the bits
// selected by wr_mask into row wr_row of both arrays. cmb_* performs
// x[cmb_row_l] ^= (x[cmb_row_r] >> cmb_shift) & cmb_mask. The read port is
// combinational. The position-ordered layout and the in-place combine are
// this design's choices; the paper only names a partial-sum memory.
module psum_mem #(
  parameter int N  = 1024,
  parameter int PE = 64,
  localparam int RW  = (N / PE > 1) ? $clog2(N / PE) : 1,
  localparam int SHW = $clog2(PE) + 1
) (
  input  logic            clk,
  input  logic            clr,
  input  logic            wr_en,
  input  logic [RW-1:0]   wr_row,
  input  logic [PE-1:0]   wr_mask,
  input  logic [PE-1:0]   wr_x,
  input  logic [PE-1:0]   wr_u,
  input  logic            cmb_en,
  input  logic [RW-1:0]   cmb_row_l,
  input  logic [RW-1:0]   cmb_row_r,
  input  logic [SHW-1:0]  cmb_shift,
  input  logic [PE-1:0]   cmb_mask,
  input  logic [RW-1:0]   rd_row,
  output logic [PE-1:0]   rd_x,
  output logic [N-1:0]    u_all,
  output logic [N-1:0]    x_all
);
  localparam int R = N / PE;
  logic [PE-1:0] x [R];
  logic [PE-1:0] u [R];

  always_ff @(posedge clk) begin
    if (clr) begin
      for (int r = 0; r < R; r++) begin
        x[r] <= '0;
        u[r] <= '0;
      end
    end else begin
      if (wr_en) begin
        x[wr_row] <= (x[wr_row] & ~wr_mask) | (wr_x & wr_mask);
        u[wr_row] <= (u[wr_row] & ~wr_mask) | (wr_u & wr_mask);
      end
      if (cmb_en)
        x[cmb_row_l] <= x[cmb_row_l] ^ ((x[cmb_row_r] >> cmb_shift) & cmb_mask);
    end
  end

  assign rd_x = x[rd_row];

  always_comb
    for (int r = 0; r < R; r++) begin
      u_all[r*PE +: PE] = u[r];
      x_all[r*PE +: PE] = x[r];
    end
endmodule
