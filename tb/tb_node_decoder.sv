// tb_node_decoder -- random Rate-0, Rate-1, Rep and SPC nodes of every size
// up to PE, with and without a flip, compared with reference decisions
// computed here (hard decisions, Rep sum, SPC parity fix on the least
// reliable bit, flips) and with u obtained by the polar transform
// u_i = XOR of beta_j over all j whose bits include those of i.
module tb_node_decoder;
  import dscf_pkg::*;
  localparam int PE = 16;
  node_type_t ntype;
  logic [2:0] stage;
  llr_t [PE-1:0] llr;
  logic flip_en;
  logic [IDX_W-1:0] idx1, idx2, imin;
  logic [PE-1:0] beta, u;
  logic gamma;
  int checks = 0, failures = 0;

  node_decoder #(.PE(PE)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int size, sum, mn, im, par;
      logic [PE-1:0] eb, eu;
      node_type_t tt [4];
      tt = '{NT_R0, NT_R1, NT_REP, NT_SPC};
      ntype = tt[it % 4];
      stage = 3'($urandom_range(ntype == NT_SPC ? 2 : 0, 4));
      size = 1 << stage;
      for (int i = 0; i < PE; i++) llr[i] = llr_t'(int'($urandom_range(0, 2 * LLR_MAX)) - LLR_MAX);
      flip_en = logic'($urandom & 1);
      idx1 = IDX_W'($urandom_range(0, size - 1));
      idx2 = IDX_W'((int'(idx1) + $urandom_range(1, size - 1)) % size);
      if (size == 1) idx2 = idx1;
      #1;
      sum = 0; mn = 1000; im = 0; par = 0;
      for (int i = 0; i < size; i++) begin
        int m;
        sum += int'(llr[i]);
        m = int'(llr[i]) < 0 ? -int'(llr[i]) : int'(llr[i]);
        if (m < mn) begin mn = m; im = i; end
        par ^= int'(llr[i] < 0);
      end
      eb = '0;
      for (int i = 0; i < size; i++)
        case (ntype)
          NT_R1, NT_SPC: eb[i] = llr[i] < 0;
          NT_REP:        eb[i] = sum < 0;
          default:       eb[i] = 1'b0;
        endcase
      if (ntype == NT_SPC && par == 1) eb[im] = ~eb[im];
      if (flip_en)
        case (ntype)
          NT_REP: for (int i = 0; i < size; i++) eb[i] = ~eb[i];
          NT_R1:  eb[idx1] = ~eb[idx1];
          NT_SPC: begin eb[idx1] = ~eb[idx1]; eb[idx2] = ~eb[idx2]; end
          default: ;
        endcase
      eu = '0;
      for (int i = 0; i < size; i++)
        for (int j = 0; j < size; j++)
          if ((j & i) == i) eu[i] ^= eb[j];
      checks += 2;
      if ((beta & PE'((1 << size) - 1)) != eb) begin
        failures++;
        if (failures < 10) $display("type %0d size %0d beta %h exp %h", ntype, size, beta, eb);
      end
      if ((u & PE'((1 << size) - 1)) != eu) failures++;
      if (ntype == NT_SPC) begin
        checks += 2;
        if (gamma != logic'(par)) failures++;
        if (int'(imin) != im) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
