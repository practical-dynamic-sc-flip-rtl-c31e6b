// tb_crc_unit -- feeds random messages in random masked chunks and compares
// the remainder with a bit-serial division by x^16+x^12+x^5+1 computed here;
// appending the computed CRC must leave a zero remainder (ok), and a single
// corrupted bit must be detected.
module tb_crc_unit;
  import dscf_pkg::*;
  localparam int PE = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, clr = 0, en = 0;
  logic [PE-1:0] bits = '0, mask = '0;
  logic [15:0] crc;
  logic ok;
  int checks = 0, failures = 0;

  crc_unit #(.PE(PE)) dut (.*);

  function automatic logic [15:0] ref_crc(input logic msg [$]);
    logic [16:0] r;
    r = '0;
    foreach (msg[i]) begin
      r = {r[15:0], msg[i]};
      if (r[16]) r = r ^ 17'h11021;
    end
    for (int i = 0; i < 16; i++) begin
      r = {r[15:0], 1'b0};
      if (r[16]) r = r ^ 17'h11021;
    end
    return r[15:0];
  endfunction

  task automatic feed(input logic msg [$]);
    int p;
    p = 0;
    while (p < msg.size()) begin
      @(negedge clk);
      en = 1; mask = '0; bits = PE'($urandom);
      for (int i = 0; i < PE; i++)
        if (($urandom & 3) != 0 && p < msg.size()) begin
          mask[i] = 1'b1; bits[i] = msg[p]; p++;
        end
    end
    @(negedge clk);
    en = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic msg [$];
    logic [15:0] c;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      msg = {};
      for (int i = 0; i < 20 + it * 7; i++) msg.push_back(logic'($urandom & 1));
      c = ref_crc(msg);
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      feed(msg);
      checks++;
      if (crc != c) begin failures++; $display("crc %h exp %h", crc, c); end
      for (int i = 15; i >= 0; i--) msg.push_back(c[i]);
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      feed(msg);
      checks++;
      if (!ok) failures++;
      msg[$urandom_range(0, msg.size() - 1)] ^= 1'b1;
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      feed(msg);
      checks++;
      if (ok) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
