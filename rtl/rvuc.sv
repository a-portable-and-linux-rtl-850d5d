// rvuc: RVuc, the RV32I micro controller that performs the VirtIO I/O
// processing in software.
//
// A four-step multi-cycle processor: IF reads the instruction from the
// local memory, OF decodes it (imm_gen) and reads the register file, EX
// computes with the ALU (ALU_I), the branch unit (ALU_B) and the address
// adders, and MEM accesses memory. The write back of the result happens in
// the following IF step, as the last column of the block diagram shows.
// The local memory (LMEM_BYTES, 8 KB) holds the program and data at
// addresses 0..LMEM_BYTES-1. Any other address is an external access on
// w_data_addr / w_data_wdata / w_data_data, a request held until the
// MMU's one-cycle ready: DRAM (physical addresses, no TLB) and the I/O
// register blocks.
//
// RVuc sleeps until `run` (an I/O request from RVCoreM) and then executes
// from address 0 until an EBREAK or ECALL, keeping `busy` high meanwhile;
// RVCoreM is held while RVuc is busy. The local memory is loaded through
// the prog_* port. No CSRs, no interrupts, FENCE is a no-op. The four
// steps and the w_data_* names follow the paper; start/stop and the load
// port are this design's.
module rvuc
  import rv_pkg::*;
#(
  parameter int LMEM_BYTES = 8192
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        run,
  output logic        busy,
  // external data access
  output logic        w_data_req,
  output logic        w_data_we,
  output logic [3:0]  w_data_be,
  output logic [31:0] w_data_addr,
  output logic [31:0] w_data_wdata,
  input  logic [31:0] w_data_data,
  input  logic        w_data_ready,
  // local memory load port
  input  logic        prog_we,
  input  logic [31:0] prog_addr,
  input  logic [31:0] prog_data,
  // status
  output logic [31:0] n_insn
);
  localparam int WORDS = LMEM_BYTES / 4;
  localparam int AW    = $clog2(WORDS);

  typedef enum logic [2:0] { U_STOP, U_IF, U_OF, U_EX, U_MEM } u_t;
  u_t st;

  logic [31:0] lmem [WORDS];
  logic [31:0] pc, ir, lq, r_wb_data, r_addr, r_st, rs1v, rs2v, imm_q;
  logic        wb_pend, ld_pend;
  logic [4:0]  wb_rd;
  logic [2:0]  ld_f3;
  logic [1:0]  ld_off;

  // ------------------------------------------- local memory (one port)
  logic          lm_we;
  logic [3:0]    lm_be;
  logic [AW-1:0] lm_addr;
  logic [31:0]   lm_wdata;
  always_ff @(posedge clk) begin
    if (prog_we) lmem[prog_addr[AW+1:2]] <= prog_data;
    else if (lm_we) begin
      for (int b = 0; b < 4; b++)
        if (lm_be[b]) lmem[lm_addr][8*b +: 8] <= lm_wdata[8*b +: 8];
    end
    lq <= lmem[lm_addr];
  end

  // -------------------------------------------------------- datapath
  logic [31:0] imm, rd1, rd2, alu_y, wd;
  logic        taken;
  alu_op_t     aop;
  imm_gen u_imm (.ir(lq), .imm);   // OF decodes the word just read
  logic rf_we;
  regfile u_rf (.clk, .rst, .ra1(lq[19:15]), .ra2(lq[24:20]), .rd1, .rd2,
                .we(rf_we), .wa(wb_rd), .wd);
  alu_i u_alu (.op(aop), .a((ir[6:0] == OP_AUIPC) ? pc : rs1v),
               .b((ir[6:0] == OP_OP) ? rs2v : imm_q), .y(alu_y));
  alu_b u_br (.funct3(ir[14:12]), .a(rs1v), .b(rs2v), .taken);

  wire [6:0] opc = ir[6:0];
  wire [2:0] f3  = ir[14:12];
  always_comb begin
    unique case (f3)
      3'b000: aop = (opc == OP_OP && ir[30]) ? ALU_SUB : ALU_ADD;
      3'b001: aop = ALU_SLL;
      3'b010: aop = ALU_SLT;
      3'b011: aop = ALU_SLTU;
      3'b100: aop = ALU_XOR;
      3'b101: aop = ir[30] ? ALU_SRA : ALU_SRL;
      3'b110: aop = ALU_OR;
      default: aop = ALU_AND;
    endcase
    if (opc == OP_LUI) aop = ALU_PASSB;
    if (opc == OP_AUIPC) aop = ALU_ADD;
  end

  // load extension of the word read (local or external)
  function automatic logic [31:0] ext(input logic [31:0] w, input logic [1:0] off, input logic [2:0] f);
    logic [31:0] s;
    s = w >> (8 * off);
    unique case (f)
      3'b000:  return {{24{s[7]}}, s[7:0]};
      3'b001:  return {{16{s[15]}}, s[15:0]};
      3'b100:  return {24'b0, s[7:0]};
      3'b101:  return {16'b0, s[15:0]};
      default: return s;
    endcase
  endfunction

  // write back in the IF step; a local load's data arrives there
  assign rf_we = (st == U_IF) && wb_pend;
  assign wd    = ld_pend ? ext(lq, ld_off, ld_f3) : r_wb_data;

  wire is_local = (r_addr < 32'(LMEM_BYTES));
  logic [3:0] be;
  always_comb begin
    unique case (f3[1:0])
      2'b00:   be = 4'b0001 << r_addr[1:0];
      2'b01:   be = 4'b0011 << r_addr[1:0];
      default: be = 4'b1111;
    endcase
  end

  // local memory port: fetch in IF, data in MEM
  always_comb begin
    lm_we = 1'b0; lm_be = be; lm_wdata = r_st << (8 * r_addr[1:0]);
    lm_addr = pc[AW+1:2];
    if (st == U_MEM) begin
      lm_addr = r_addr[AW+1:2];
      lm_we   = (opc == OP_STORE) && is_local;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= U_STOP; pc <= '0; ir <= '0; r_wb_data <= '0; r_addr <= '0; r_st <= '0;
      rs1v <= '0; rs2v <= '0; imm_q <= '0; wb_pend <= 1'b0; ld_pend <= 1'b0; wb_rd <= '0;
      ld_f3 <= '0; ld_off <= '0; busy <= 1'b0; n_insn <= '0;
      w_data_req <= 1'b0; w_data_we <= 1'b0; w_data_be <= '0; w_data_addr <= '0; w_data_wdata <= '0;
    end else begin
      unique case (st)
        U_STOP: begin
          wb_pend <= 1'b0;
          if (run) begin
            busy <= 1'b1; pc <= '0; st <= U_IF;
          end
        end
        U_IF: begin                       // instruction read, write back
          wb_pend <= 1'b0;
          ld_pend <= 1'b0;
          st <= U_OF;
        end
        U_OF: begin
          ir    <= lq;
          rs1v  <= rd1;
          rs2v  <= rd2;
          imm_q <= imm;
          st <= U_EX;
        end
        U_EX: begin
          if (opc == OP_SYSTEM && f3 == 3'b000) begin      // ECALL/EBREAK end the job
            busy <= 1'b0;
            st <= U_STOP;
          end else begin
            st <= U_MEM;
          end
          n_insn <= n_insn + 1'b1;
        end
        U_MEM: begin
          if ((opc == OP_LOAD || opc == OP_STORE) && !is_local) begin
            if (!w_data_req) begin
              w_data_req <= 1'b1; w_data_we <= (opc == OP_STORE);
              w_data_be <= be; w_data_addr <= {r_addr[31:2], 2'b00};
              w_data_wdata <= r_st << (8 * r_addr[1:0]);
            end else if (w_data_ready) begin
              w_data_req <= 1'b0;
              r_wb_data <= ext(w_data_data, r_addr[1:0], f3);
              wb_pend <= (opc == OP_LOAD) && (ir[11:7] != 5'd0);
              st <= U_IF;
            end
          end else begin
            wb_pend <= (opc == OP_LOAD || opc == OP_OP || opc == OP_IMM || opc == OP_LUI ||
                        opc == OP_AUIPC || opc == OP_JAL || opc == OP_JALR);
            ld_pend <= (opc == OP_LOAD);
            st <= U_IF;
          end
        end
        default: st <= U_STOP;
      endcase
      // results of EX for MEM and the write back
      if (st == U_EX) begin
        wb_rd  <= ir[11:7];
        r_addr <= rs1v + imm_q;
        r_st   <= rs2v;
        ld_f3  <= f3;
        ld_off <= (rs1v[1:0] + imm_q[1:0]);
        r_wb_data <= (opc == OP_JAL || opc == OP_JALR) ? pc + 32'd4 : alu_y;
        if (opc == OP_JAL)                      pc <= pc + imm_q;
        else if (opc == OP_JALR)                pc <= (rs1v + imm_q) & ~32'd1;
        else if (opc == OP_BRANCH && taken)     pc <= pc + imm_q;
        else                                    pc <= pc + 32'd4;
      end
    end
  end

endmodule
