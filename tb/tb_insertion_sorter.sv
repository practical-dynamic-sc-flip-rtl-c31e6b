// tb_insertion_sorter -- random sequences of init, insertions of up to three
// sorted elements and forward shifts, compared after every operation with a
// reference list kept here: merge with ties placing old elements first,
// truncation to SLEN (with the number of dropped elements), and on a shift
// removal of the head and subtraction of the new head's metric.
module tb_insertion_sorter;
  import dscf_pkg::*;
  localparam int SLEN = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, init = 0, insert = 0, shift = 0;
  elem_t [2:0] new_el = '0;
  elem_t [SLEN-1:0] lam;
  logic [1:0] dropped;
  int checks = 0, failures = 0;
  elem_t q [$];

  insertion_sorter #(.SLEN(SLEN)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      int op, nd;
      op = (it % 200 == 0) ? 0 : $urandom_range(1, 5);
      init = 0; insert = 0; shift = 0; nd = 0;
      if (op == 0) begin
        elem_t h;
        init = 1;
        h = '0; h.valid = 1;
        q = {h};
      end else if (op < 5) begin
        int nn, m [3];
        nn = $urandom_range(1, 3);
        for (int j = 0; j < 3; j++) m[j] = $urandom_range(0, 40);
        m.sort();
        new_el = '0;
        for (int j = 0; j < nn; j++) begin
          new_el[j] = elem_t'({$urandom, $urandom});
          new_el[j].valid = 1;
          new_el[j].metric = metric_t'(m[j]);
        end
        insert = 1;
        for (int j = 0; j < nn; j++) begin
          int p;
          p = 0;
          while (p < q.size() && q[p].metric <= new_el[j].metric) p++;
          q.insert(p, new_el[j]);
        end
        while (q.size() > SLEN) begin q.pop_back(); nd++; end
      end else if (q.size() >= 2) begin
        int m1;
        shift = 1;
        void'(q.pop_front());
        m1 = int'(q[0].metric);
        foreach (q[i]) q[i].metric = metric_t'(int'(q[i].metric) - m1);
      end
      #1;
      if (insert) begin
        checks++;
        if (int'(dropped) != nd) failures++;
      end
      @(negedge clk);
      for (int i = 0; i < SLEN; i++) begin
        checks++;
        if (i < q.size()) begin
          if (lam[i] != q[i]) begin
            failures++;
            if (failures < 10) $display("it %0d pos %0d metric %0d exp %0d", it, i, lam[i].metric, q[i].metric);
          end
        end else if (lam[i].valid) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
