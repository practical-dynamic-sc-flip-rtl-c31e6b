// tb_findmin4 -- random magnitudes (with many ties) and node sizes; the four
// reported minima must be the four smallest magnitudes in increasing order,
// ties resolved towards the lower index, with valid cleared past the node
// size.
module tb_findmin4;
  import dscf_pkg::*;
  localparam int PE = 16;
  logic [2:0] stage = '0;
  logic [PE-1:0][QI-1:0] mag = '0;
  logic [3:0][IDX_W-1:0] idx;
  logic [3:0][QI-1:0] val;
  logic [3:0] valid;
  int checks = 0, failures = 0;

  findmin4 #(.PE(PE)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 4000; it++) begin
      int sz, taken [PE];
      stage = 3'($urandom_range(0, 4));
      sz = 1 << stage;
      for (int i = 0; i < PE; i++) begin
        mag[i] = QI'((it % 2) ? $urandom_range(0, 5) : $urandom_range(0, (1 << QI) - 1));
        taken[i] = 0;
      end
      #1;
      for (int k = 0; k < 4; k++) begin
        int b, bi;
        b = 1 << 30; bi = -1;
        for (int i = 0; i < sz; i++)
          if (!taken[i] && int'(mag[i]) < b) begin b = mag[i]; bi = i; end
        checks++;
        if (valid[k] != (bi >= 0)) failures++;
        else if (bi >= 0) begin
          taken[bi] = 1;
          checks++;
          if (int'(idx[k]) != bi || int'(val[k]) != b) failures++;
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
