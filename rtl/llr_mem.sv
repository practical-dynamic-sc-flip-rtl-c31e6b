// llr_mem -- LLR memory of the semi-parallel decoder.
//
// Rows of PE LLRs. Stage s (0 <= s < n) keeps the LLRs of the node being
// decoded at that tree level in max(1, 2^s/PE) rows starting at
// row_base(s); the N channel LLRs (stage n) follow in N/PE rows. Stages
// smaller than PE use the low lanes of a single row. This stage-wise layout
// is the usual one for semi-parallel SC decoders; the paper names the LLR
// memory without detailing it.
//
// Two combinational read ports feed the two halves of a branch operation,
// one synchronous write port stores PE results per cycle. Contents are not
// reset: every row is written before it is read.
module llr_mem
  import dscf_pkg::*;
#(
  parameter int ROWS = 37,
  parameter int PE   = 64,
  localparam int AW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic           clk,
  input  logic           we,
  input  logic [AW-1:0]  waddr,
  input  llr_t [PE-1:0]  wdata,
  input  logic [AW-1:0]  raddr0,
  output llr_t [PE-1:0]  rdata0,
  input  logic [AW-1:0]  raddr1,
  output llr_t [PE-1:0]  rdata1
);
  llr_t [PE-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata0 = mem[raddr0];
  assign rdata1 = mem[raddr1];
endmodule
