// imm_gen: immediate generator of RVCoreM and RVuc (the imm_gen block of
// the ID/OF steps).
//
// From the opcode it picks the RV32I immediate format (I, S, B, U or J),
// gathers the scattered bits and sign-extends them to 32 bits. It is
// purely combinational. The paper only names the block; its insides are
// the base ISA's immediate formats.
module imm_gen
  import rv_pkg::*;
(
  input  logic [31:0] ir,
  output logic [31:0] imm
);
  always_comb begin
    unique case (ir[6:0])
      OP_STORE:          imm = {{21{ir[31]}}, ir[30:25], ir[11:7]};
      OP_BRANCH:         imm = {{20{ir[31]}}, ir[7], ir[30:25], ir[11:8], 1'b0};
      OP_LUI, OP_AUIPC:  imm = {ir[31:12], 12'b0};
      OP_JAL:            imm = {{12{ir[31]}}, ir[19:12], ir[20], ir[30:21], 1'b0};
      default:           imm = {{21{ir[31]}}, ir[30:20]};
    endcase
  end
endmodule
