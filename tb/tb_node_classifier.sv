// tb_node_classifier -- checks the node types of the 16-bit example tree
// (information bits 7 and 9..15: Rate-0, Rep, SPC and Rate-1 subtrees of
// size 4) and of random frozen sets against a direct inspection of each
// node's range of positions.
module tb_node_classifier;
  import dscf_pkg::*;
  localparam int N = 16;
  logic [N-1:0] info_mask;
  node_type_t types [2*N];
  int checks = 0, failures = 0;

  node_classifier #(.N(N)) dut (.info_mask, .types);

  function automatic node_type_t ref_type(input int h);
    int s, k, size, pos, ninfo;
    s = 0;
    while ((h << s) < N) s++;
    size = 1 << s;
    k = h - (N >> s);
    pos = k * size;
    ninfo = 0;
    for (int i = 0; i < size; i++) ninfo += int'(info_mask[pos + i]);
    if (ninfo == 0) return NT_R0;
    if (ninfo == size) return NT_R1;
    if (ninfo == 1 && info_mask[pos + size - 1]) return NT_REP;
    if (size >= 4 && ninfo == size - 1 && !info_mask[pos]) return NT_SPC;
    return NT_GEN;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    info_mask = 16'b1111_1110_1000_0000;
    #1;
    checks += 5;
    if (types[4] != NT_R0)  failures++;
    if (types[5] != NT_REP) failures++;
    if (types[6] != NT_SPC) failures++;
    if (types[7] != NT_R1)  failures++;
    if (types[1] != NT_GEN) failures++;
    for (int it = 0; it < 300; it++) begin
      info_mask = N'($urandom);
      if (it % 3 == 0) info_mask = info_mask | N'($urandom);
      #1;
      for (int h = 1; h < 2 * N; h++) begin
        checks++;
        if (types[h] != ref_type(h)) begin
          failures++;
          if (failures < 10) $display("mask %h node %0d got %0d exp %0d", info_mask, h, types[h], ref_type(h));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
