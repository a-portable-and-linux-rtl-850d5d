// tb_imm_gen: random instructions of every format; the expected immediate
// is rebuilt bit by bit from the ISA's format tables.
`include "tb_check.svh"
module tb_imm_gen;
  int checks = 0, failures = 0;
  logic [31:0] ir, imm, exp;
  imm_gen dut (.ir, .imm);
  logic [6:0] ops [7] = '{7'b0010011, 7'b0100011, 7'b1100011, 7'b0110111, 7'b1101111, 7'b0000011, 7'b1100111};
  initial begin
    for (int i = 0; i < 700; i++) begin
      ir = {$urandom() >> 7, ops[i % 7]};
      #1;
      exp = '0;
      case (ir[6:0])
        7'b0100011: begin for (int b = 0; b < 5; b++) exp[b] = ir[7+b]; for (int b = 5; b < 32; b++) exp[b] = (b < 11) ? ir[20+b] : ir[31]; end
        7'b1100011: begin exp[0] = 0; for (int b = 1; b < 5; b++) exp[b] = ir[7+b]; for (int b = 5; b < 11; b++) exp[b] = ir[20+b]; exp[11] = ir[7]; for (int b = 12; b < 32; b++) exp[b] = ir[31]; end
        7'b0110111: exp = ir & 32'hFFFFF000;
        7'b1101111: begin exp[0] = 0; for (int b = 1; b < 11; b++) exp[b] = ir[20+b]; exp[11] = ir[20]; for (int b = 12; b < 20; b++) exp[b] = ir[b]; for (int b = 20; b < 32; b++) exp[b] = ir[31]; end
        default:    exp = 32'($signed(ir) >>> 20);
      endcase
      `CHECK_EQ(imm, exp, $sformatf("imm of %h", ir))
    end
    `TB_DONE
  end
  initial begin #100000; failures++; `TB_DONE end
endmodule
