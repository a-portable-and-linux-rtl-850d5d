// alu_a: atomic memory operation unit (ALU_A of the EX2 step).
//
// An AMO loads a word in the LD step, this unit combines it with rs2 in
// EX2 and the result is stored in SD. The operations and their funct5
// codes are those of the RISC-V A extension. Combinational.
module alu_a (
  input  logic [4:0]  funct5,
  input  logic [31:0] mem,
  input  logic [31:0] rs2,
  output logic [31:0] y
);
  always_comb begin
    unique case (funct5)
      5'b00001: y = rs2;                                              // AMOSWAP
      5'b00000: y = mem + rs2;                                        // AMOADD
      5'b00100: y = mem ^ rs2;                                        // AMOXOR
      5'b01100: y = mem & rs2;                                        // AMOAND
      5'b01000: y = mem | rs2;                                        // AMOOR
      5'b10000: y = ($signed(mem) < $signed(rs2)) ? mem : rs2;        // AMOMIN
      5'b10100: y = ($signed(mem) < $signed(rs2)) ? rs2 : mem;        // AMOMAX
      5'b11000: y = (mem < rs2) ? mem : rs2;                          // AMOMINU
      5'b11100: y = (mem < rs2) ? rs2 : mem;                          // AMOMAXU
      default:  y = rs2;                                              // SC data
    endcase
  end
endmodule
