// tb_metric_gen -- drives sequences of random Rate-0/Rate-1/Rep/SPC nodes
// into the decision metric generator and compares, for every node, the
// candidate list (validity, metric, order, flip entry) and the accumulated
// M'' register with a reference written here from the metric equations:
// f*(x) = 1.5 for x <= 5 else 0 (scaled by the fractional LLR bits),
// Rate-1 candidates = two smallest |L|, Rep = |sum L|, SPC = pairs of the
// four smallest with |L_a|+|L_b|-2 gamma |L_min|, all sorted by metric and
// saturated to the metric width.
module tb_metric_gen;
  import dscf_pkg::*;
  localparam int PE = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, clr = 0, node_valid = 0, accum_en = 0, gen_en = 0;
  node_type_t ntype = NT_R0;
  logic [2:0] stage = '0;
  llr_t [PE-1:0] llr = '0;
  logic [NODE_W-1:0] node_id = '0;
  elem_t cur = '0;
  elem_t [5:0] cand;
  metric_t m2;
  int checks = 0, failures = 0;
  int ref_m2 = 0;

  metric_gen #(.PE(PE)) dut (.*);

  function automatic int fs(input int x);
    return (x <= (5 << FRAC)) ? ((3 << FRAC) / 2) : 0;
  endfunction
  function automatic int sat(input int x);
    return (x > (1 << QM) - 1) ? (1 << QM) - 1 : x;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 1500; it++) begin
      int size, mag [PE], mi [4], gam, sum, sumf, m2n, nc;
      int cm [6], c1 [6], c2 [6];
      node_type_t tt [4];
      if (it % 10 == 0) begin
        clr = 1; @(negedge clk); clr = 0; ref_m2 = 0;
        cur = '0;
        cur.valid = 1;
        cur.order = ORD_W'($urandom_range(0, OMEGA - 1));
        for (int e = 0; e < OMEGA; e++) cur.flips[e] = flip_t'($urandom);
      end
      tt = '{NT_R0, NT_R1, NT_REP, NT_SPC};
      ntype = tt[$urandom_range(0, 3)];
      stage = 3'($urandom_range(ntype == NT_SPC ? 2 : 0, 4));
      size = 1 << stage;
      for (int i = 0; i < PE; i++)
        llr[i] = llr_t'(int'($urandom_range(0, 2 * (($urandom & 1) ? 12 : LLR_MAX))) -
                        (($urandom & 1) ? 12 : LLR_MAX));
      node_valid = 1;
      accum_en = logic'($urandom_range(0, 3) != 0);
      gen_en = logic'($urandom_range(0, 3) != 0);
      node_id = NODE_W'($urandom);
      #1;
      // reference
      sum = 0; gam = 0;
      for (int i = 0; i < size; i++) begin
        mag[i] = int'(llr[i]) < 0 ? -int'(llr[i]) : int'(llr[i]);
        sum += int'(llr[i]);
        gam ^= int'(llr[i] < 0);
      end
      for (int k = 0; k < 4; k++) begin
        int best;
        best = 1000; mi[k] = -1;
        for (int i = 0; i < size; i++)
          if (mag[i] < best && !(k > 0 && i == mi[0]) && !(k > 1 && i == mi[1]) && !(k > 2 && i == mi[2])) begin
            best = mag[i]; mi[k] = i;
          end
      end
      sumf = 0;
      case (ntype)
        NT_R1:  for (int i = 0; i < size; i++) sumf += fs(mag[i]);
        NT_REP: sumf = fs(sum < 0 ? -sum : sum);
        NT_SPC: for (int i = 0; i < size; i++)
                  if (i != mi[0]) sumf += fs(gam ? mag[i] - mag[mi[0]] : mag[i] + mag[mi[0]]);
        default: ;
      endcase
      m2n = accum_en ? sat(ref_m2 + sumf) : ref_m2;
      nc = 0;
      case (ntype)
        NT_R1: begin
          cm[0] = mag[mi[0]]; c1[0] = mi[0]; c2[0] = 0; nc = 1;
          if (size > 1) begin cm[1] = mag[mi[1]]; c1[1] = mi[1]; c2[1] = 0; nc = 2; end
        end
        NT_REP: begin cm[0] = sum < 0 ? -sum : sum; c1[0] = 0; c2[0] = 0; nc = 1; end
        NT_SPC:
          for (int a = 0; a < 4; a++)
            for (int b = a + 1; b < 4; b++) begin
              cm[nc] = mag[mi[a]] + mag[mi[b]] - 2 * gam * mag[mi[0]];
              c1[nc] = mi[a]; c2[nc] = mi[b]; nc++;
            end
        default: ;
      endcase
      // stable sort by metric
      for (int i = 1; i < nc; i++)
        for (int j = i; j > 0 && cm[j] < cm[j-1]; j--) begin
          int t;
          t = cm[j]; cm[j] = cm[j-1]; cm[j-1] = t;
          t = c1[j]; c1[j] = c1[j-1]; c1[j-1] = t;
          t = c2[j]; c2[j] = c2[j-1]; c2[j-1] = t;
        end
      for (int c = 0; c < 6; c++) begin
        logic ev;
        ev = gen_en && c < nc;
        checks++;
        if (cand[c].valid != ev) begin
          failures++;
          if (failures < 10) $display("it %0d type %0d cand %0d valid %0d exp %0d", it, ntype, c, cand[c].valid, ev);
        end else if (ev) begin
          checks++;
          if (int'(cand[c].metric) != sat(m2n + cm[c]) ||
              int'(cand[c].order) != int'(cur.order) + 1 ||
              int'(cand[c].flips[cur.order].idx1) != c1[c] ||
              (ntype == NT_SPC && int'(cand[c].flips[cur.order].idx2) != c2[c]) ||
              cand[c].flips[cur.order].node != node_id ||
              (cur.order > 0 && cand[c].flips[0] != cur.flips[0])) begin
            failures++;
            if (failures < 10) $display("it %0d type %0d cand %0d metric %0d exp %0d idx %0d exp %0d",
                                        it, ntype, c, cand[c].metric, sat(m2n + cm[c]),
                                        cand[c].flips[cur.order].idx1, c1[c]);
          end
        end
      end
      @(negedge clk);
      ref_m2 = m2n;
      checks++;
      if (int'(m2) != ref_m2) failures++;
      node_valid = 0;
      if ($urandom & 1) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
