// tb_alu_i: random operands for every ALU_I operation; expected values are
// computed with 64-bit integer arithmetic in the testbench.
`include "tb_check.svh"
module tb_alu_i;
  import rv_pkg::*;
  int checks = 0, failures = 0;
  alu_op_t op;
  logic [31:0] a, b, y, e;
  longint sa, sb, ua, ub, p;
  alu_i dut (.op, .a, .b, .y);
  initial begin
    for (int i = 0; i < 3000; i++) begin
      op = alu_op_t'(i % 15);
      a = (i % 7 == 0) ? 32'h8000_0000 : $urandom();
      b = (i % 11 == 0) ? 32'hFFFF_FFFF : $urandom();
      #1;
      sa = longint'($signed(a)); sb = longint'($signed(b));
      ua = longint'({32'b0, a}); ub = longint'({32'b0, b});
      case (op)
        ALU_ADD:  e = 32'(ua + ub);
        ALU_SUB:  e = 32'(ua - ub);
        ALU_SLL:  e = 32'(ua << (ub % 32));
        ALU_SLT:  e = (sa < sb) ? 1 : 0;
        ALU_SLTU: e = (ua < ub) ? 1 : 0;
        ALU_XOR:  e = a ^ b;
        ALU_SRL:  e = 32'(ua >> (ub % 32));
        ALU_SRA:  e = 32'(sa >>> (ub % 32));
        ALU_OR:   e = a | b;
        ALU_AND:  e = a & b;
        ALU_MUL:  begin p = sa * sb; e = p[31:0]; end
        ALU_MULH: begin p = sa * sb; e = p[63:32]; end
        ALU_MULHSU: begin p = sa * ub; e = p[63:32]; end
        ALU_MULHU:  begin p = ua * ub; e = p[63:32]; end
        default:  e = b;
      endcase
      `CHECK_EQ(y, e, $sformatf("op %s a=%h b=%h", op.name(), a, b))
    end
    `TB_DONE
  end
  initial begin #100000; failures++; `TB_DONE end
endmodule
