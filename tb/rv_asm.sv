// rv_asm: instruction encoders used by the testbenches to build RISC-V
// test programs without an external assembler. Register numbers are
// plain integers (x0..x31); immediates are byte offsets.
package rv_asm;
  function automatic logic [31:0] r_t(int f7, int rs2, int rs1, int f3, int rd, logic [6:0] op);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction
  function automatic logic [31:0] i_t(int imm, int rs1, int f3, int rd, logic [6:0] op);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction
  function automatic logic [31:0] s_t(int imm, int rs2, int rs1, int f3);
    logic [11:0] m = 12'(imm);
    return {m[11:5], 5'(rs2), 5'(rs1), 3'(f3), m[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_t(int imm, int rs2, int rs1, int f3);
    logic [12:0] m = 13'(imm);
    return {m[12], m[10:5], 5'(rs2), 5'(rs1), 3'(f3), m[4:1], m[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] lui(int rd, int imm20);   return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic logic [31:0] auipc(int rd, int imm20); return {20'(imm20), 5'(rd), 7'b0010111}; endfunction
  function automatic logic [31:0] jal(int rd, int off);
    logic [20:0] m = 21'(off);
    return {m[20], m[10:1], m[11], m[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] jalr(int rd, int rs1, int imm) ; return i_t(imm, rs1, 0, rd, 7'b1100111); endfunction
  function automatic logic [31:0] addi(int rd, int rs1, int imm) ; return i_t(imm, rs1, 0, rd, 7'b0010011); endfunction
  function automatic logic [31:0] xori(int rd, int rs1, int imm) ; return i_t(imm, rs1, 4, rd, 7'b0010011); endfunction
  function automatic logic [31:0] slli(int rd, int rs1, int sh)  ; return i_t(sh, rs1, 1, rd, 7'b0010011); endfunction
  function automatic logic [31:0] srli(int rd, int rs1, int sh)  ; return i_t(sh, rs1, 5, rd, 7'b0010011); endfunction
  function automatic logic [31:0] add(int rd, int rs1, int rs2)  ; return r_t(0, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] sub(int rd, int rs1, int rs2)  ; return r_t(32, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] or_(int rd, int rs1, int rs2)  ; return r_t(0, rs2, rs1, 6, rd, 7'b0110011); endfunction
  function automatic logic [31:0] mul(int rd, int rs1, int rs2)  ; return r_t(1, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] div(int rd, int rs1, int rs2)  ; return r_t(1, rs2, rs1, 4, rd, 7'b0110011); endfunction
  function automatic logic [31:0] remu(int rd, int rs1, int rs2) ; return r_t(1, rs2, rs1, 7, rd, 7'b0110011); endfunction
  function automatic logic [31:0] lw(int rd, int rs1, int imm)   ; return i_t(imm, rs1, 2, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lbu(int rd, int rs1, int imm)  ; return i_t(imm, rs1, 4, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lb(int rd, int rs1, int imm)   ; return i_t(imm, rs1, 0, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lh(int rd, int rs1, int imm)   ; return i_t(imm, rs1, 1, rd, 7'b0000011); endfunction
  function automatic logic [31:0] sw(int rs2, int rs1, int imm)  ; return s_t(imm, rs2, rs1, 2); endfunction
  function automatic logic [31:0] sh(int rs2, int rs1, int imm)  ; return s_t(imm, rs2, rs1, 1); endfunction
  function automatic logic [31:0] sb(int rs2, int rs1, int imm)  ; return s_t(imm, rs2, rs1, 0); endfunction
  function automatic logic [31:0] beq(int rs1, int rs2, int off) ; return b_t(off, rs2, rs1, 0); endfunction
  function automatic logic [31:0] bne(int rs1, int rs2, int off) ; return b_t(off, rs2, rs1, 1); endfunction
  function automatic logic [31:0] blt(int rs1, int rs2, int off) ; return b_t(off, rs2, rs1, 4); endfunction
  function automatic logic [31:0] csrrw(int rd, int csr, int rs1); return i_t(csr, rs1, 1, rd, 7'b1110011); endfunction
  function automatic logic [31:0] csrrs(int rd, int csr, int rs1); return i_t(csr, rs1, 2, rd, 7'b1110011); endfunction
  function automatic logic [31:0] amo(logic [4:0] f5, int rd, int rs1, int rs2); return r_t(int'(f5) << 2, rs2, rs1, 2, rd, 7'b0101111); endfunction
  function automatic logic [31:0] lr_w(int rd, int rs1)          ; return amo(5'b00010, rd, rs1, 0); endfunction
  function automatic logic [31:0] sc_w(int rd, int rs1, int rs2) ; return amo(5'b00011, rd, rs1, rs2); endfunction
  function automatic logic [31:0] ecall()  ; return 32'h0000_0073; endfunction
  function automatic logic [31:0] ebreak() ; return 32'h0010_0073; endfunction
  function automatic logic [31:0] mret()   ; return 32'h3020_0073; endfunction
  function automatic logic [31:0] sret()   ; return 32'h1020_0073; endfunction
  function automatic logic [31:0] sfence() ; return 32'h1200_0073; endfunction
  // compressed forms (16 bits)
  function automatic logic [15:0] c_addi(int rd, int imm);
    logic [5:0] m = 6'(imm);
    return {3'b000, m[5], 5'(rd), m[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_li(int rd, int imm);
    logic [5:0] m = 6'(imm);
    return {3'b010, m[5], 5'(rd), m[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_mv(int rd, int rs2); return {4'b1000, 5'(rd), 5'(rs2), 2'b10}; endfunction
  function automatic logic [15:0] c_add(int rd, int rs2); return {4'b1001, 5'(rd), 5'(rs2), 2'b10}; endfunction
  function automatic logic [15:0] c_nop(); return 16'h0001; endfunction
endpackage
