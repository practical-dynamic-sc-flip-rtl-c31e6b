// tb_pe_array -- checks the F and G branch operations lane by lane against
// integer reference formulas with symmetric saturation, for random LLRs
// including the saturation limits.
module tb_pe_array;
  import dscf_pkg::*;
  localparam int PE = 8;
  logic op_g;
  llr_t [PE-1:0] a, b, y;
  logic [PE-1:0] beta;
  int checks = 0, failures = 0;

  pe_array #(.PE(PE)) dut (.op_g, .a, .b, .beta, .y);

  function automatic int rnd_llr();
    return int'($urandom_range(0, 2 * LLR_MAX)) - LLR_MAX;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      op_g = logic'(it % 2);
      for (int i = 0; i < PE; i++) begin
        a[i] = llr_t'((it % 7 == 0) ? ((i % 2) ? LLR_MAX : -LLR_MAX) : rnd_llr());
        b[i] = llr_t'((it % 5 == 0) ? ((i % 3) ? LLR_MAX : -LLR_MAX) : rnd_llr());
        beta[i] = logic'($urandom & 1);
      end
      #1;
      for (int i = 0; i < PE; i++) begin
        int ai, bi, exp;
        ai = int'(a[i]);
        bi = int'(b[i]);
        if (!op_g) begin
          int m;
          m = (ai < 0 ? -ai : ai) < (bi < 0 ? -bi : bi) ? (ai < 0 ? -ai : ai) : (bi < 0 ? -bi : bi);
          exp = ((ai < 0) != (bi < 0)) ? -m : m;
        end else begin
          exp = beta[i] ? bi - ai : bi + ai;
          if (exp > LLR_MAX) exp = LLR_MAX;
          if (exp < -LLR_MAX) exp = -LLR_MAX;
        end
        checks++;
        if (int'(y[i]) != exp) begin
          failures++;
          if (failures < 10) $display("lane %0d op_g %0d a %0d b %0d beta %0d: got %0d exp %0d",
                                      i, op_g, ai, bi, beta[i], int'(y[i]), exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
