// alu_c: CSR read-modify-write unit (ALU_C of the EX1 step).
//
// Computes the new value of a CSR from its old value and the source
// operand (rs1, or the 5-bit zimm for the immediate forms, selected by
// the caller): write (CSRRW/I), set bits (CSRRS/I) or clear bits
// (CSRRC/I). The result is registered as r_wb_data_csr and written to
// the CSR file in the COM step. Combinational.
module alu_c (
  input  logic [2:0]  funct3,
  input  logic [31:0] csr,
  input  logic [31:0] src,
  output logic [31:0] y
);
  always_comb begin
    unique case (funct3[1:0])
      2'b01:   y = src;
      2'b10:   y = csr | src;
      2'b11:   y = csr & ~src;
      default: y = csr;
    endcase
  end
endmodule
