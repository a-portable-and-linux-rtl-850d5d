// rvc_conv: compressed-instruction converter (conv of the CVT step).
//
// RVCoreM turns every 16-bit RVC instruction into its 32-bit equivalent
// here, so the later steps only ever see standard instructions. An
// instruction whose two low bits are 11 is already 32 bits wide and is
// passed through. The expansion is the RV32C table of the RISC-V
// specification (integer instructions only; the floating-point forms
// and reserved encodings raise `illegal` and give zero).
// Combinational; ir_in[15:0] holds the compressed instruction.
module rvc_conv (
  input  logic [31:0] ir_in,
  output logic [31:0] ir_out,
  output logic        is_c,
  output logic        illegal
);
  logic [15:0] c;
  logic [4:0]  rdp, rs1p, rs2p, rd, rs2;
  logic [31:0] x;
  logic        bad;

  // immediates of the compressed formats
  logic [11:0] imm_ci, imm_lwsp, imm_swsp, imm_lw, imm_addi4, imm_16sp;
  logic [20:0] imm_j;
  logic [12:0] imm_b;
  logic [19:0] imm_lui;

  always_comb begin
    c    = ir_in[15:0];
    rdp  = {2'b01, c[4:2]};
    rs1p = {2'b01, c[9:7]};
    rs2p = {2'b01, c[4:2]};
    rd   = c[11:7];
    rs2  = c[6:2];
    imm_ci    = {{7{c[12]}}, c[6:2]};
    imm_lwsp  = {4'b0, c[3:2], c[12], c[6:4], 2'b00};
    imm_swsp  = {4'b0, c[8:7], c[12:9], 2'b00};
    imm_lw    = {5'b0, c[5], c[12:10], c[6], 2'b00};
    imm_addi4 = {2'b0, c[10:7], c[12:11], c[5], c[6], 2'b00};
    imm_16sp  = {{3{c[12]}}, c[4:3], c[5], c[2], c[6], 4'b0};
    imm_j     = {{10{c[12]}}, c[8], c[10:9], c[6], c[7], c[2], c[11], c[5:3], 1'b0};
    imm_b     = {{5{c[12]}}, c[6:5], c[2], c[11:10], c[4:3], 1'b0};
    imm_lui   = {{15{c[12]}}, c[6:2]};
    x   = 32'h0;
    bad = 1'b0;
    is_c = (c[1:0] != 2'b11);
    if (!is_c) begin
      x = ir_in;
    end else begin
      unique case ({c[15:13], c[1:0]})
        // ---------------- quadrant 0
        5'b000_00: begin // C.ADDI4SPN
          x = {imm_addi4, 5'd2, 3'b000, rdp, 7'b0010011};
          bad = (c[12:5] == 8'd0);
        end
        5'b010_00: x = {imm_lw, rs1p, 3'b010, rdp, 7'b0000011};               // C.LW
        5'b110_00: x = {imm_lw[11:5], rs2p, rs1p, 3'b010, imm_lw[4:0], 7'b0100011}; // C.SW
        // ---------------- quadrant 1
        5'b000_01: x = {imm_ci, rd, 3'b000, rd, 7'b0010011};                  // C.ADDI / C.NOP
        5'b001_01: x = {imm_j[20], imm_j[10:1], imm_j[11], imm_j[19:12], 5'd1, 7'b1101111}; // C.JAL
        5'b010_01: x = {imm_ci, 5'd0, 3'b000, rd, 7'b0010011};                // C.LI
        5'b011_01: begin
          if (rd == 5'd2) x = {imm_16sp, 5'd2, 3'b000, 5'd2, 7'b0010011};     // C.ADDI16SP
          else            x = {imm_lui, rd, 7'b0110111};                      // C.LUI
          bad = ({c[12], c[6:2]} == 6'd0);
        end
        5'b100_01: begin
          unique case (c[11:10])
            2'b00: x = {7'b0000000, c[6:2], rs1p, 3'b101, rs1p, 7'b0010011}; // C.SRLI
            2'b01: x = {7'b0100000, c[6:2], rs1p, 3'b101, rs1p, 7'b0010011}; // C.SRAI
            2'b10: x = {imm_ci, rs1p, 3'b111, rs1p, 7'b0010011};             // C.ANDI
            default: begin
              bad = c[12];
              unique case (c[6:5])
                2'b00: x = {7'b0100000, rs2p, rs1p, 3'b000, rs1p, 7'b0110011}; // C.SUB
                2'b01: x = {7'b0000000, rs2p, rs1p, 3'b100, rs1p, 7'b0110011}; // C.XOR
                2'b10: x = {7'b0000000, rs2p, rs1p, 3'b110, rs1p, 7'b0110011}; // C.OR
                default: x = {7'b0000000, rs2p, rs1p, 3'b111, rs1p, 7'b0110011}; // C.AND
              endcase
            end
          endcase
          if (c[11:10] != 2'b10 && c[12]) bad = 1'b1;  // RV32: shamt[5] reserved
        end
        5'b101_01: x = {imm_j[20], imm_j[10:1], imm_j[11], imm_j[19:12], 5'd0, 7'b1101111}; // C.J
        5'b110_01: x = {imm_b[12], imm_b[10:5], 5'd0, rs1p, 3'b000, imm_b[4:1], imm_b[11], 7'b1100011}; // C.BEQZ
        5'b111_01: x = {imm_b[12], imm_b[10:5], 5'd0, rs1p, 3'b001, imm_b[4:1], imm_b[11], 7'b1100011}; // C.BNEZ
        // ---------------- quadrant 2
        5'b000_10: begin
          x = {7'b0000000, c[6:2], rd, 3'b001, rd, 7'b0010011};              // C.SLLI
          bad = c[12];
        end
        5'b010_10: begin
          x = {imm_lwsp, 5'd2, 3'b010, rd, 7'b0000011};                      // C.LWSP
          bad = (rd == 5'd0);
        end
        5'b100_10: begin
          if (!c[12]) begin
            if (rs2 == 5'd0) begin
              x = {12'd0, rd, 3'b000, 5'd0, 7'b1100111};                     // C.JR
              bad = (rd == 5'd0);
            end else begin
              x = {7'b0, rs2, 5'd0, 3'b000, rd, 7'b0110011};                 // C.MV
            end
          end else begin
            if (rs2 == 5'd0) begin
              if (rd == 5'd0) x = 32'h0010_0073;                             // C.EBREAK
              else            x = {12'd0, rd, 3'b000, 5'd1, 7'b1100111};     // C.JALR
            end else begin
              x = {7'b0, rs2, rd, 3'b000, rd, 7'b0110011};                   // C.ADD
            end
          end
        end
        5'b110_10: x = {imm_swsp[11:5], rs2, 5'd2, 3'b010, imm_swsp[4:0], 7'b0100011}; // C.SWSP
        default: bad = 1'b1;
      endcase
    end
    if (bad) x = 32'h0;
    ir_out  = x;
    illegal = bad;
  end
endmodule
