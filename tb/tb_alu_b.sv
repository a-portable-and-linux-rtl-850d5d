// tb_alu_b: all six branch conditions on random and boundary operands.
`include "tb_check.svh"
module tb_alu_b;
  int checks = 0, failures = 0;
  logic [2:0] f3; logic [31:0] a, b; logic t, e;
  alu_b dut (.funct3(f3), .a, .b, .taken(t));
  logic [2:0] fs [6] = '{3'b000, 3'b001, 3'b100, 3'b101, 3'b110, 3'b111};
  initial begin
    for (int i = 0; i < 1200; i++) begin
      f3 = fs[i % 6];
      // operand kind chosen at random, independent of the condition
      a = ($urandom() % 4 == 0) ? 32'h8000_0000 : $urandom() % 8;
      b = ($urandom() % 3 == 0) ? a : (($urandom() % 4 == 0) ? 32'h7FFF_FFFF : $urandom() % 8);
      #1;
      case (f3)
        3'b000: e = (a == b);
        3'b001: e = (a != b);
        3'b100: e = (int'(a) < int'(b));
        3'b101: e = !(int'(a) < int'(b));
        3'b110: e = ({1'b0, a} < {1'b0, b});
        default: e = !({1'b0, a} < {1'b0, b});
      endcase
      `CHECK_EQ(t, e, $sformatf("f3=%0d a=%h b=%h", f3, a, b))
    end
    `TB_DONE
  end
  initial begin #100000; failures++; `TB_DONE end
endmodule
