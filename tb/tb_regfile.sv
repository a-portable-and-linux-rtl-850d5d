// tb_regfile: random writes and reads against an array model; x0 stays 0.
`include "tb_check.svh"
module tb_regfile;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, we = 0;
  logic [4:0] ra1, ra2, wa; logic [31:0] rd1, rd2, wd;
  logic [31:0] model [32];
  regfile dut (.*);
  always #5 clk = ~clk;
  initial begin
    for (int i = 0; i < 32; i++) model[i] = 0;
    ra1 = 0; ra2 = 0; wa = 0; wd = 0;
    @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 2000; i++) begin
      we = $urandom() % 2; wa = 5'($urandom()); wd = $urandom();
      ra1 = 5'($urandom()); ra2 = 5'($urandom());
      #1;
      `CHECK_EQ(rd1, model[ra1], "read port 1")
      `CHECK_EQ(rd2, model[ra2], "read port 2")
      @(posedge clk); #1;
      if (we && wa != 0) model[wa] = wd;
    end
    we = 0; ra1 = 0; #1;
    `CHECK_EQ(rd1, 32'd0, "x0")
    `TB_DONE
  end
  initial begin #1000000; failures++; `TB_DONE end
endmodule
