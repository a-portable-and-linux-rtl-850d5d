// alu_b: branch condition unit (ALU_B of the EX1 step, feeding r_tkn).
//
// Compares rs1 and rs2 according to the branch funct3 (BEQ, BNE, BLT,
// BGE, BLTU, BGEU) and says whether the branch is taken. Combinational.
module alu_b (
  input  logic [2:0]  funct3,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        taken
);
  always_comb begin
    unique case (funct3)
      3'b000:  taken = (a == b);
      3'b001:  taken = (a != b);
      3'b100:  taken = ($signed(a) <  $signed(b));
      3'b101:  taken = ($signed(a) >= $signed(b));
      3'b110:  taken = (a <  b);
      3'b111:  taken = (a >= b);
      default: taken = 1'b0;
    endcase
  end
endmodule
