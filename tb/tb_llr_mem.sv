// tb_llr_mem -- writes random rows into the LLR memory and reads them back
// through both read ports, comparing with a shadow copy; also checks that a
// row written in a cycle is visible on the read ports after the clock edge
// and that a cycle without we leaves the memory unchanged.
module tb_llr_mem;
  import dscf_pkg::*;
  localparam int ROWS = 12, PE = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [3:0] waddr = '0, raddr0 = '0, raddr1 = '0;
  llr_t [PE-1:0] wdata = '0, rdata0, rdata1;
  llr_t [PE-1:0] shadow [ROWS];
  int checks = 0, failures = 0;

  llr_mem #(.ROWS(ROWS), .PE(PE)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      we = 1; waddr = 4'(r);
      for (int p = 0; p < PE; p++) wdata[p] = llr_t'($urandom);
      shadow[r] = wdata;
      @(negedge clk);
    end
    for (int it = 0; it < 300; it++) begin
      we = logic'($urandom & 1);
      waddr = 4'($urandom_range(0, ROWS - 1));
      for (int p = 0; p < PE; p++) wdata[p] = llr_t'($urandom);
      raddr0 = 4'($urandom_range(0, ROWS - 1));
      raddr1 = 4'($urandom_range(0, ROWS - 1));
      #1;
      checks += 2;
      if (rdata0 != shadow[raddr0]) failures++;
      if (rdata1 != shadow[raddr1]) failures++;
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
