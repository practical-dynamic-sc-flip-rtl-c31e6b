// crc_unit -- parallel CRC-16 (polynomial 0x1021) over the decoded message.
//
// The decoded information bits u_A are K message bits followed by the C = 16
// CRC bits. Running the CRC register over all K + C bits, starting from
// zero, leaves a zero remainder exactly when the frame is consistent, so the
// check needs no separate comparison with the received CRC. Each cycle up to
// PE bits are absorbed in lane order; lanes whose mask bit is 0 (frozen
// positions) are skipped. The PE bit steps are unrolled into one
// combinational update, so the unit keeps pace with the decoder core, which
// presents one decoded node per cycle. The polynomial is the paper's; the
// zero initial value, MSB-first order and masked unrolled form are this
// design's choices.
//   clr : clear the remainder (start of an attempt)
//   en  : absorb bits/mask this cycle
//   ok  : remainder is zero (registered state, valid the cycle after en)
module crc_unit
  import dscf_pkg::*;
#(
  parameter int PE = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              en,
  input  logic [PE-1:0]     bits,
  input  logic [PE-1:0]     mask,
  output logic [CRC_W-1:0]  crc,
  output logic              ok
);
  logic [CRC_W-1:0] nxt;

  always_comb begin
    logic fb;
    fb  = 1'b0;
    nxt = crc;
    for (int i = 0; i < PE; i++) begin
      fb = nxt[CRC_W-1] ^ bits[i];
      if (mask[i]) nxt = {nxt[CRC_W-2:0], 1'b0} ^ (fb ? CRC_POLY : '0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   crc <= '0;
    else if (clr) crc <= '0;
    else if (en)  crc <= nxt;
  end

  assign ok = (crc == '0);
endmodule
