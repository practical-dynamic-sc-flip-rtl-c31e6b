// tb_cand_shift_reg -- loads groups of six candidates and checks that the
// first three come out in the next cycle, the last three in the cycle after,
// that all-invalid groups are not presented and that empty is reported
// correctly.
module tb_cand_shift_reg;
  import dscf_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, load = 0, out_valid, empty;
  elem_t [5:0] in = '0;
  elem_t [2:0] out;
  int checks = 0, failures = 0;

  cand_shift_reg dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    elem_t [5:0] v;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      int nv;
      nv = $urandom_range(0, 6);
      v = '0;
      for (int i = 0; i < 6; i++) begin
        v[i] = elem_t'({$urandom, $urandom});
        v[i].valid = (i < nv);
      end
      in = v; load = 1;
      @(negedge clk);
      load = 0; in = '0;
      checks += 3;
      if (out_valid != (nv > 0)) failures++;
      if (nv > 0 && out != v[2:0]) failures++;
      if (empty != (nv == 0)) failures++;
      @(negedge clk);
      checks += 2;
      if (out_valid != (nv > 3)) failures++;
      if (nv > 3 && out != v[5:3]) failures++;
      @(negedge clk);
      checks++;
      if (!empty || out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
