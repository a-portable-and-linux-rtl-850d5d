// tb_alu_c: CSRRW/S/C (and the immediate forms) on random values.
`include "tb_check.svh"
module tb_alu_c;
  int checks = 0, failures = 0;
  logic [2:0] f3; logic [31:0] c, s, y, e;
  alu_c dut (.funct3(f3), .csr(c), .src(s), .y);
  initial begin
    for (int i = 0; i < 600; i++) begin
      f3 = 3'(1 + (i % 3) + ((i % 2) ? 4 : 0)); c = $urandom(); s = $urandom();
      #1;
      case (f3[1:0]) 2'b01: e = s; 2'b10: e = c | s; default: e = c & ~s; endcase
      `CHECK_EQ(y, e, $sformatf("f3=%0d", f3))
    end
    `TB_DONE
  end
  initial begin #100000; failures++; `TB_DONE end
endmodule
