// tb_psum_mem -- random masked writes, in-place combines (full-row and
// within-row with a shift) and clears of the partial-sum memory, compared
// after every cycle with a bit-level model of the same operations.
module tb_psum_mem;
  localparam int N = 64, PE = 16, R = N / PE;
  logic clk = 0;
  always #5 clk = ~clk;
  logic clr = 0, wr_en = 0, cmb_en = 0;
  logic [1:0] wr_row = 0, cmb_row_l = 0, cmb_row_r = 0, rd_row = 0;
  logic [PE-1:0] wr_mask = 0, wr_x = 0, wr_u = 0, cmb_mask = 0, rd_x;
  logic [4:0] cmb_shift = 0;
  logic [N-1:0] u_all, x_all, mx, mu;
  int checks = 0, failures = 0;

  psum_mem #(.N(N), .PE(PE)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    clr = 1; mx = '0; mu = '0;
    @(negedge clk);
    clr = 0;
    for (int it = 0; it < 600; it++) begin
      int op;
      op = $urandom_range(0, 9);
      wr_en = 0; cmb_en = 0; clr = 0;
      if (op == 0) clr = 1;
      else if (op < 5) begin
        wr_en = 1; wr_row = 2'($urandom); wr_mask = PE'($urandom);
        wr_x = PE'($urandom); wr_u = PE'($urandom);
      end else begin
        int h;
        cmb_en = 1;
        if (op < 7) begin
          cmb_row_l = 2'($urandom); cmb_row_r = 2'($urandom); cmb_shift = 0; cmb_mask = '1;
        end else begin
          h = 1 << $urandom_range(0, 3);
          cmb_row_l = 2'($urandom); cmb_row_r = cmb_row_l; cmb_shift = 5'(h);
          cmb_mask = PE'(((1 << h) - 1) << (2 * h * $urandom_range(0, PE / (2 * h) - 1)));
        end
      end
      rd_row = 2'($urandom);
      @(posedge clk);
      // model
      if (clr) begin mx = '0; mu = '0; end
      else begin
        if (wr_en) begin
          mx[wr_row*PE +: PE] = (mx[wr_row*PE +: PE] & ~wr_mask) | (wr_x & wr_mask);
          mu[wr_row*PE +: PE] = (mu[wr_row*PE +: PE] & ~wr_mask) | (wr_u & wr_mask);
        end
        if (cmb_en)
          for (int i = 0; i < PE; i++)
            if (cmb_mask[i]) mx[cmb_row_l*PE + i] ^= mx[cmb_row_r*PE + i + cmb_shift];
      end
      @(negedge clk);
      checks += 3;
      if (x_all != mx) failures++;
      if (u_all != mu) failures++;
      if (rd_x != mx[rd_row*PE +: PE]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
