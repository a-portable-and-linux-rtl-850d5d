// tb_alu_a: every AMO operation with random operands against a reference.
`include "tb_check.svh"
module tb_alu_a;
  int checks = 0, failures = 0;
  logic [4:0] f5; logic [31:0] m, r, y, e;
  alu_a dut (.funct5(f5), .mem(m), .rs2(r), .y);
  logic [4:0] fs [9] = '{5'b00001, 5'b00000, 5'b00100, 5'b01100, 5'b01000, 5'b10000, 5'b10100, 5'b11000, 5'b11100};
  initial begin
    for (int i = 0; i < 900; i++) begin
      f5 = fs[i % 9]; m = $urandom(); r = (i % 4 == 0) ? ~m : $urandom();
      #1;
      case (f5)
        5'b00001: e = r;
        5'b00000: e = m + r;
        5'b00100: e = m ^ r;
        5'b01100: e = m & r;
        5'b01000: e = m | r;
        5'b10000: e = (int'(m) < int'(r)) ? m : r;
        5'b10100: e = (int'(m) > int'(r)) ? m : r;
        5'b11000: e = (longint'(m) < longint'(r)) ? m : r;
        default:  e = (longint'(m) > longint'(r)) ? m : r;
      endcase
      `CHECK_EQ(y, e, $sformatf("f5=%b m=%h r=%h", f5, m, r))
    end
    `TB_DONE
  end
  initial begin #100000; failures++; `TB_DONE end
endmodule
