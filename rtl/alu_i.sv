// alu_i: integer ALU of RVCoreM (ALU_I of the EX1 step).
//
// Performs the RV32I register and immediate operations and the four
// multiplies of the M extension in a single cycle, as the baseline
// multi-cycle design assumes. Division is not here: it runs in the
// separate multi-cycle divider. ALU_PASSB forwards operand b (used for
// LUI). Combinational.
module alu_i
  import rv_pkg::*;
(
  input  alu_op_t     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic [63:0] p_ss, p_su, p_uu;
  always_comb begin
    p_ss = 64'($signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b}));
    p_su = 64'($signed({{32{a[31]}}, a}) * $signed({32'b0, b}));
    p_uu = {32'b0, a} * {32'b0, b};
    unique case (op)
      ALU_ADD:    y = a + b;
      ALU_SUB:    y = a - b;
      ALU_SLL:    y = a << b[4:0];
      ALU_SLT:    y = {31'b0, $signed(a) < $signed(b)};
      ALU_SLTU:   y = {31'b0, a < b};
      ALU_XOR:    y = a ^ b;
      ALU_SRL:    y = a >> b[4:0];
      ALU_SRA:    y = 32'($signed(a) >>> b[4:0]);
      ALU_OR:     y = a | b;
      ALU_AND:    y = a & b;
      ALU_MUL:    y = p_uu[31:0];
      ALU_MULH:   y = p_ss[63:32];
      ALU_MULHSU: y = p_su[63:32];
      ALU_MULHU:  y = p_uu[63:32];
      ALU_PASSB:  y = b;
      default:    y = a + b;
    endcase
  end
endmodule
