// rvcorem: RVCoreM, the main processor of RVSoC.
//
// A multi-cycle RV32IMAC processor with machine, supervisor and user
// modes. Each instruction walks through up to twelve steps, one state each:
//   INI  start of an instruction; a pending enabled interrupt is taken here
//   IF   fetch 4 bytes through TLB_i (ifetch_buf, 16-bit Buffer); loops
//        while a fetch that crosses a cache line needs a second access
//   CVT  expand a compressed instruction (rvc_conv) into r_ir
//   ID   decode into the decoded registers, immediate from imm_gen
//   OF   read rs1/rs2 (regfile) and the CSR (csr_file)
//   EX1  ALU_I, ALU_B (r_tkn), jump target (r_jmp_pc), memory address
//        (r_mem_addr), ALU_C (r_wb_data_csr); DIV/REM wait here for the
//        multi-cycle divider
//   LD   load through TLB_r (loads, LR, AMO); plain stores pass
//   EX2  ALU_A computes the AMO store value
//   SD   store through TLB_w (stores, successful SC, AMO)
//   WB   write the register file
//   COM  update CSRs and the PC (next, jump target, trap vector, xRET)
//   FIN  count the executed instruction
// Steps are skipped as in the paper's state diagram: EX1 goes to WB when
// the instruction is neither load, store nor atomic; LD goes to WB for
// loads and LR, to SD for stores and SC; page faults in IF, LD or SD and
// ECALL (and the other synchronous exceptions) go directly to COM. When
// `stall` is high (RVuc is running) the core holds its current step. A
// one-cycle result that arrives during a stall (fetch done, memory ready,
// divider done) is latched and used once the stall ends; the memory
// request is withdrawn while such a result is held, so it is not issued
// twice. An ALU instruction takes more than the paper's minimum of 8
// cycles even on a cache hit: the fetch passes several registered stages
// (fetch unit, MMU, cache) before IF ends; 15 cycles were measured for
// the shortest instruction.
//
// Memory port: a virtual request (core_req_t) with its access kind is held
// until the MMU answers with a one-cycle ready, possibly with a page fault.
// The step sequence and the register names follow the paper's block
// diagram; interrupts at INI, misaligned-access and illegal-instruction
// traps, the reset PC and the TLB flush rule are this design's choices.
module rvcorem
  import rv_pkg::*;
#(
  parameter logic [31:0] RESET_PC   = 32'h8000_0000,
  parameter int          LINE_BYTES = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        stall,
  output core_req_t   mreq,
  input  core_rsp_t   mrsp,
  input  logic        irq_mtip,
  input  logic        irq_meip,
  input  logic        irq_seip,
  // state the MMU needs
  output logic [1:0]  priv,
  output logic [31:0] satp,
  output logic        sum,
  output logic        mxr,
  output logic        tlb_flush,
  // status
  output step_t       step,
  output logic [63:0] instret,
  // one-cycle event strobes (for statistics and tests)
  output logic        ev_div,
  output logic        ev_amo,
  output logic        ev_trap,
  output logic        ev_compressed,
  output logic        ev_buf_hit,
  output logic        ev_two_access,
  output logic        ev_skip_ex1_wb,
  output logic        ev_skip_ld_wb,
  output logic        ev_skip_ld_sd
);
  step_t st;
  assign step = st;

  // ------------------------------------------------ architectural regs
  logic [31:0] pc;
  logic [31:0] r_ir_raw, r_ir;
  logic        r_is_c;

  // decoded registers
  logic [4:0]  d_rd, d_rs1, d_rs2;
  logic [2:0]  d_f3;
  logic [6:0]  d_f7;
  logic [11:0] d_csr;
  logic [31:0] d_imm;
  alu_op_t     d_alu;
  logic d_load, d_store, d_amo, d_lr, d_sc, d_branch, d_jal, d_jalr, d_lui, d_auipc;
  logic d_alu_imm, d_csr_op, d_ecall, d_ebreak, d_mret, d_sret, d_sfence, d_fencei;
  logic d_div, d_wb, d_illegal, d_csr_we;

  // step registers of the block diagram
  logic [31:0] r_rs1, r_rs2, r_rcsr, r_jmp_pc, r_mem_addr, r_wb_data, r_wb_data_csr;
  logic [31:0] r_mem_rdata, r_mem_wdata;
  logic        r_tkn;
  logic        exc;
  logic [31:0] exc_cause, exc_tval;
  logic        sc_fail;
  logic        res_valid;
  logic        fetch_started, div_issued, div_fin;   // div_fin: result ready (kept across stalls)
  logic        f_got, mr_pend;                       // fetch / memory result kept across stalls
  core_rsp_t   mr_q, mr;
  logic [31:0] res_addr;

  // ------------------------------------------------------- sub-units
  logic [31:0] conv_out;
  logic        conv_is_c, conv_ill;
  rvc_conv u_conv (.ir_in(r_ir_raw), .ir_out(conv_out), .is_c(conv_is_c), .illegal(conv_ill));

  logic [31:0] imm;
  imm_gen u_imm (.ir(r_ir), .imm(imm));

  logic [31:0] rf_rd1, rf_rd2, w_wb_r_data;
  logic        rf_we;
  regfile u_rf (.clk, .rst, .ra1(d_rs1), .ra2(d_rs2), .rd1(rf_rd1), .rd2(rf_rd2),
                .we(rf_we), .wa(d_rd), .wd(w_wb_r_data));

  logic [31:0] alu_a_in, alu_b_in, alu_y;
  alu_i u_alu_i (.op(d_alu), .a(alu_a_in), .b(alu_b_in), .y(alu_y));

  logic br_taken;
  alu_b u_alu_b (.funct3(d_f3), .a(r_rs1), .b(r_rs2), .taken(br_taken));

  logic [31:0] csr_new;
  alu_c u_alu_c (.funct3(d_f3), .csr(r_rcsr), .src(d_f3[2] ? {27'b0, d_rs1} : r_rs1), .y(csr_new));

  logic [31:0] amo_y;
  alu_a u_alu_a (.funct5(d_f7[6:2]), .mem(r_mem_rdata), .rs2(r_rs2), .y(amo_y));

  logic div_start, div_busy, div_done;
  logic [31:0] div_y;
  divider #(.XLEN(32)) u_div (.clk, .rst, .start(div_start), .funct3(d_f3), .a(r_rs1), .b(r_rs2),
                              .busy(div_busy), .done(div_done), .y(div_y));

  // CSRs
  logic [31:0] csr_rdata, trap_vec, ret_pc, irq_cause;
  logic        csr_rill, csr_we, csr_trap, csr_mret, csr_sret, irq_take, instret_inc;
  logic [31:0] trap_cause;
  csr_file u_csr (
    .clk, .rst,
    .raddr(d_csr), .rdata(csr_rdata), .rillegal(csr_rill),
    .we(csr_we), .waddr(d_csr), .wdata(r_wb_data_csr),
    .trap(csr_trap), .cause(trap_cause), .tval(exc_tval), .epc(pc),
    .mret(csr_mret), .sret(csr_sret), .trap_vec, .ret_pc,
    .instret_inc, .irq_mtip, .irq_meip, .irq_seip, .irq_take, .irq_cause,
    .priv, .satp, .sum, .mxr
  );

  // fetch unit
  logic        f_start, f_valid, f_done, f_fault, f_flush;
  logic [31:0] f_addr, f_ir, f_fault_addr;
  ifetch_buf #(.LINE_BYTES(LINE_BYTES)) u_fetch (
    .clk, .rst, .flush(f_flush), .start(f_start), .pc,
    .mem_valid(f_valid), .mem_addr(f_addr),
    .mem_ready(mrsp.ready && st == S_IF), .mem_fault(mrsp.fault), .mem_data(mrsp.rdata),
    .done(f_done), .fault(f_fault), .fault_addr(f_fault_addr), .ir(f_ir),
    .ev_buf_hit, .ev_two_access
  );

  // ------------------------------------------------ decode (ID step)
  always_comb begin
    logic [6:0] opc;
    logic [2:0] f3;
    logic [6:0] f7;
    opc = r_ir[6:0];
    f3  = r_ir[14:12];
    f7  = r_ir[31:25];
    {d_load, d_store, d_amo, d_lr, d_sc, d_branch, d_jal, d_jalr, d_lui, d_auipc} = '0;
    {d_alu_imm, d_csr_op, d_ecall, d_ebreak, d_mret, d_sret, d_sfence, d_fencei} = '0;
    d_div = 1'b0; d_wb = 1'b0; d_illegal = 1'b0; d_alu = ALU_ADD;
    unique case (opc)
      OP_LUI:    begin d_lui = 1'b1; d_wb = 1'b1; d_alu = ALU_PASSB; end
      OP_AUIPC:  begin d_auipc = 1'b1; d_wb = 1'b1; end
      OP_JAL:    begin d_jal = 1'b1; d_wb = 1'b1; end
      OP_JALR:   begin d_jalr = 1'b1; d_wb = 1'b1; d_illegal = (f3 != 3'b000); end
      OP_BRANCH: begin d_branch = 1'b1; d_illegal = (f3 == 3'b010 || f3 == 3'b011); end
      OP_LOAD:   begin d_load = 1'b1; d_wb = 1'b1; d_illegal = (f3 == 3'b011 || f3 == 3'b110 || f3 == 3'b111); end
      OP_STORE:  begin d_store = 1'b1; d_illegal = (f3 > 3'b010); end
      OP_IMM: begin
        d_alu_imm = 1'b1; d_wb = 1'b1;
        unique case (f3)
          3'b000: d_alu = ALU_ADD;
          3'b010: d_alu = ALU_SLT;
          3'b011: d_alu = ALU_SLTU;
          3'b100: d_alu = ALU_XOR;
          3'b110: d_alu = ALU_OR;
          3'b111: d_alu = ALU_AND;
          3'b001: begin d_alu = ALU_SLL; d_illegal = (f7 != 7'b0); end
          default: begin d_alu = f7[5] ? ALU_SRA : ALU_SRL; d_illegal = (f7 != 7'b0 && f7 != 7'b0100000); end
        endcase
      end
      OP_OP: begin
        d_wb = 1'b1;
        if (f7 == 7'b0000001) begin
          unique case (f3)
            3'b000: d_alu = ALU_MUL;
            3'b001: d_alu = ALU_MULH;
            3'b010: d_alu = ALU_MULHSU;
            3'b011: d_alu = ALU_MULHU;
            default: d_div = 1'b1;
          endcase
        end else begin
          d_illegal = !(f7 == 7'b0 || (f7 == 7'b0100000 && (f3 == 3'b000 || f3 == 3'b101)));
          unique case (f3)
            3'b000: d_alu = f7[5] ? ALU_SUB : ALU_ADD;
            3'b001: d_alu = ALU_SLL;
            3'b010: d_alu = ALU_SLT;
            3'b011: d_alu = ALU_SLTU;
            3'b100: d_alu = ALU_XOR;
            3'b101: d_alu = f7[5] ? ALU_SRA : ALU_SRL;
            3'b110: d_alu = ALU_OR;
            default: d_alu = ALU_AND;
          endcase
        end
      end
      OP_AMO: begin
        d_wb = 1'b1;
        d_illegal = (f3 != 3'b010);
        if      (f7[6:2] == 5'b00010) begin d_lr = 1'b1; d_illegal |= (r_ir[24:20] != 5'd0); end
        else if (f7[6:2] == 5'b00011) d_sc = 1'b1;
        else begin
          d_amo = 1'b1;
          unique case (f7[6:2])
            5'b00001, 5'b00000, 5'b00100, 5'b01100, 5'b01000,
            5'b10000, 5'b10100, 5'b11000, 5'b11100: ;
            default: d_illegal = 1'b1;
          endcase
        end
      end
      OP_FENCE: d_fencei = (f3 == 3'b001);
      OP_SYSTEM: begin
        if (f3 == 3'b000) begin
          if      (r_ir == 32'h0000_0073) d_ecall  = 1'b1;
          else if (r_ir == 32'h0010_0073) d_ebreak = 1'b1;
          else if (r_ir == 32'h3020_0073) d_mret   = 1'b1;
          else if (r_ir == 32'h1020_0073) d_sret   = 1'b1;
          else if (r_ir == 32'h1050_0073) ;                  // WFI: no-op
          else if (f7 == 7'b0001001 && r_ir[11:7] == 5'd0) d_sfence = 1'b1;
          else d_illegal = 1'b1;
        end else if (f3 == 3'b100) begin
          d_illegal = 1'b1;
        end else begin
          d_csr_op = 1'b1; d_wb = 1'b1;
        end
      end
      default: d_illegal = 1'b1;
    endcase
  end

  // ------------------------------------------- EX1 operand selection
  always_comb begin
    alu_a_in = d_auipc ? pc : r_rs1;
    alu_b_in = (d_alu_imm || d_lui || d_auipc) ? d_imm : r_rs2;
  end

  // load data alignment (LD step)
  function automatic logic [31:0] load_ext(input logic [31:0] w, input logic [1:0] off, input logic [2:0] f3);
    logic [31:0] s;
    s = w >> (8 * off);
    unique case (f3)
      3'b000:  return {{24{s[7]}}, s[7:0]};
      3'b001:  return {{16{s[15]}}, s[15:0]};
      3'b100:  return {24'b0, s[7:0]};
      3'b101:  return {16'b0, s[15:0]};
      default: return s;
    endcase
  endfunction

  logic [3:0] st_be;
  always_comb begin
    unique case (d_f3[1:0])
      2'b00:   st_be = 4'b0001 << r_mem_addr[1:0];
      2'b01:   st_be = 4'b0011 << r_mem_addr[1:0];
      default: st_be = 4'b1111;
    endcase
  end

  // a memory access in LD for loads, LR and AMO
  wire ld_access = d_load || d_lr || d_amo;
  wire is_mem    = d_load || d_store || d_amo || d_lr || d_sc;
  logic misaligned;
  always_comb begin
    unique case (d_f3[1:0])
      2'b00:   misaligned = 1'b0;
      2'b01:   misaligned = r_mem_addr[0];
      default: misaligned = (r_mem_addr[1:0] != 2'b00);
    endcase
  end

  // ------------------------------------------------- memory request
  always_comb begin
    mreq = '0;
    unique case (st)
      S_IF: begin
        mreq.valid = f_valid;
        mreq.kind  = ACC_IF;
        mreq.addr  = f_addr;
        mreq.be    = 4'hF;
      end
      S_LD: begin
        mreq.valid = ld_access && !exc && !mr_pend;
        mreq.kind  = ACC_LD;
        mreq.addr  = {r_mem_addr[31:2], 2'b00};
        mreq.be    = 4'hF;
      end
      S_SD: begin
        mreq.valid = !(d_sc && sc_fail) && !mr_pend;
        mreq.kind  = ACC_SD;
        mreq.we    = 1'b1;
        mreq.addr  = {r_mem_addr[31:2], 2'b00};
        mreq.be    = st_be;
        mreq.wdata = r_mem_wdata << (8 * r_mem_addr[1:0]);
      end
      default: ;
    endcase
  end

  // write-back data mux (w_wb_r_data)
  always_comb begin
    if (d_csr_op)                 w_wb_r_data = r_rcsr;
    else if (d_sc)                w_wb_r_data = {31'b0, sc_fail};
    else if (d_load || d_lr || d_amo) w_wb_r_data = r_mem_rdata;
    else                          w_wb_r_data = r_wb_data;
  end
  assign rf_we = (st == S_WB) && !stall && d_wb && !exc;

  // CSR write only when the instruction really writes (CSRRS/C with rs1=x0 do not)
  assign d_csr_we = d_csr_op && !((d_f3[1:0] != 2'b01) && d_rs1 == 5'd0);

  wire com = (st == S_COM) && !stall;
  assign csr_we      = com && !exc && d_csr_we;
  assign csr_trap    = com && exc;
  assign csr_mret    = com && !exc && d_mret;
  assign csr_sret    = com && !exc && d_sret;
  assign instret_inc = com && !exc;
  assign trap_cause  = exc_cause;
  assign f_start     = (st == S_IF) && !stall && !f_valid && !f_done && !f_got && !fetch_started;

  // One-cycle results (fetch done, memory ready) can arrive while the core
  // is held by `stall`; they are kept until the core moves again.
  wire       f_ok = f_done || f_got;
  assign mr = mr_pend ? mr_q : mrsp;
  always_ff @(posedge clk) begin
    if (rst) begin
      f_got <= 1'b0; mr_pend <= 1'b0; mr_q <= '0;
    end else begin
      if (f_done && stall)                    f_got <= 1'b1;
      else if (!stall)                        f_got <= 1'b0;
      if (mrsp.ready && stall && st != S_IF)  begin mr_pend <= 1'b1; mr_q <= mrsp; end
      else if (!stall)                        mr_pend <= 1'b0;
    end
  end

  // TLBs and the 16-bit Buffer are flushed on anything that can change a
  // translation, a permission or the instruction memory.
  wire ctx_change = com && (exc || d_mret || d_sret || d_sfence || d_fencei ||
                    (d_csr_we && (d_csr == CSR_SATP || d_csr == CSR_MSTATUS || d_csr == CSR_SSTATUS)));
  assign tlb_flush = ctx_change;
  assign f_flush   = ctx_change || (com && !exc && (d_store || d_amo || d_sc || d_csr_we));

  assign div_start = (st == S_EX1) && !stall && d_div && !div_busy && !div_done && !div_issued;
  wire div_ok = div_done || div_fin;

  // ---------------------------------------------------- step machine
  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_INI; pc <= RESET_PC; r_ir_raw <= '0; r_ir <= '0; r_is_c <= 1'b0;
      d_rd <= '0; d_rs1 <= '0; d_rs2 <= '0; d_f3 <= '0; d_f7 <= '0; d_csr <= '0; d_imm <= '0;
      r_rs1 <= '0; r_rs2 <= '0; r_rcsr <= '0; r_jmp_pc <= '0; r_mem_addr <= '0;
      r_wb_data <= '0; r_wb_data_csr <= '0; r_mem_rdata <= '0; r_mem_wdata <= '0;
      r_tkn <= 1'b0; exc <= 1'b0; exc_cause <= '0; exc_tval <= '0; sc_fail <= 1'b0;
      res_valid <= 1'b0; res_addr <= '0; instret <= '0; fetch_started <= 1'b0;
      div_issued <= 1'b0; div_fin <= 1'b0;
      {ev_div, ev_amo, ev_trap, ev_compressed, ev_skip_ex1_wb, ev_skip_ld_wb, ev_skip_ld_sd} <= '0;
    end else begin
      {ev_div, ev_amo, ev_trap, ev_compressed, ev_skip_ex1_wb, ev_skip_ld_wb, ev_skip_ld_sd} <= '0;
      if (div_done) div_fin <= 1'b1;      // the done pulse may fall in a stall cycle
      if (!stall) begin
        unique case (st)
          S_INI: begin
            exc <= 1'b0; r_tkn <= 1'b0; sc_fail <= 1'b0; fetch_started <= 1'b0;
            div_issued <= 1'b0; div_fin <= 1'b0;
            if (irq_take) begin
              exc <= 1'b1; exc_cause <= irq_cause; exc_tval <= '0;
              st <= S_COM;
            end else begin
              st <= S_IF;
            end
          end
          S_IF: begin
            if (f_start) fetch_started <= 1'b1;
            if (f_ok) begin
              if (f_fault) begin
                exc <= 1'b1; exc_cause <= EXC_INST_PF; exc_tval <= f_fault_addr;
                st <= S_COM;
              end else begin
                r_ir_raw <= f_ir;
                st <= S_CVT;
              end
            end
          end
          S_CVT: begin
            r_ir   <= conv_out;
            r_is_c <= conv_is_c;
            ev_compressed <= conv_is_c;
            if (conv_ill) begin
              exc <= 1'b1; exc_cause <= EXC_INST_ILLEGAL; exc_tval <= r_ir_raw;
            end
            st <= S_ID;
          end
          S_ID: begin
            d_rd  <= r_ir[11:7];
            d_rs1 <= r_ir[19:15];
            d_rs2 <= r_ir[24:20];
            d_f3  <= r_ir[14:12];
            d_f7  <= r_ir[31:25];
            d_csr <= r_ir[31:20];
            d_imm <= imm;
            st <= S_OF;
          end
          S_OF: begin
            r_rs1  <= rf_rd1;
            r_rs2  <= rf_rd2;
            r_rcsr <= csr_rdata;
            st <= S_EX1;
          end
          S_EX1: begin
            r_mem_addr    <= r_rs1 + ((d_amo || d_lr || d_sc) ? 32'd0 : d_imm);   // A-extension: rs1 only
            r_mem_wdata   <= r_rs2;
            r_wb_data     <= (d_jal || d_jalr) ? pc + (r_is_c ? 32'd2 : 32'd4) : alu_y;
            r_wb_data_csr <= csr_new;
            r_tkn         <= d_jal || d_jalr || (d_branch && br_taken);
            r_jmp_pc      <= d_jalr ? ((r_rs1 + d_imm) & ~32'd1) : pc + d_imm;
            if (div_start) div_issued <= 1'b1;
            if (exc) begin
              st <= S_COM;                                   // illegal compressed
            end else if (d_illegal || (d_csr_op && (csr_rill || (d_csr_we && d_csr[11:10] == 2'b11)))
                         || (d_mret && priv != PRV_M) || (d_sret && priv == PRV_U)) begin
              exc <= 1'b1; exc_cause <= EXC_INST_ILLEGAL; exc_tval <= r_ir;
              st <= S_COM;
            end else if (d_ecall) begin
              exc <= 1'b1; exc_cause <= EXC_ECALL_U + {30'b0, priv}; exc_tval <= '0;
              st <= S_COM;
            end else if (d_ebreak) begin
              exc <= 1'b1; exc_cause <= EXC_BREAKPOINT; exc_tval <= pc;
              st <= S_COM;
            end else if (d_div) begin
              if (div_ok) begin
                r_wb_data <= div_y;
                ev_div <= 1'b1;
                st <= S_WB;
              end
            end else if (is_mem) begin
              st <= S_LD;
            end else begin
              ev_skip_ex1_wb <= 1'b1;
              st <= S_WB;
            end
          end
          S_LD: begin
            if (misaligned) begin
              exc <= 1'b1;
              exc_cause <= (d_load || d_lr) ? 32'd4 : 32'd6;
              exc_tval <= r_mem_addr;
              st <= S_COM;
            end else if (d_store) begin
              ev_skip_ld_sd <= 1'b1;
              st <= S_SD;
            end else if (d_sc) begin
              sc_fail <= !(res_valid && res_addr == r_mem_addr);
              res_valid <= 1'b0;
              ev_skip_ld_sd <= 1'b1;
              st <= S_SD;
            end else if (mr.ready) begin
              if (mr.fault) begin
                exc <= 1'b1; exc_cause <= d_amo ? EXC_STORE_PF : EXC_LOAD_PF; exc_tval <= r_mem_addr;
                st <= S_COM;
              end else begin
                r_mem_rdata <= load_ext(mr.rdata, r_mem_addr[1:0], d_f3);
                if (d_lr) begin
                  res_valid <= 1'b1; res_addr <= r_mem_addr;
                end
                if (d_amo) st <= S_EX2;
                else begin
                  ev_skip_ld_wb <= 1'b1;
                  st <= S_WB;
                end
              end
            end
          end
          S_EX2: begin
            r_mem_wdata <= amo_y;
            ev_amo <= 1'b1;
            st <= S_SD;
          end
          S_SD: begin
            if (d_sc && sc_fail) begin
              st <= S_WB;
            end else if (mr.ready) begin
              if (mr.fault) begin
                exc <= 1'b1; exc_cause <= EXC_STORE_PF; exc_tval <= r_mem_addr;
                st <= S_COM;
              end else begin
                if (res_addr == r_mem_addr) res_valid <= 1'b0;
                st <= S_WB;
              end
            end
          end
          S_WB: st <= S_COM;
          S_COM: begin
            if (exc) begin
              pc <= trap_vec;
              ev_trap <= 1'b1;
              res_valid <= 1'b0;
            end else if (d_mret || d_sret) begin
              pc <= ret_pc;
              res_valid <= 1'b0;
            end else if (r_tkn) begin
              pc <= r_jmp_pc;
            end else begin
              pc <= pc + (r_is_c ? 32'd2 : 32'd4);
            end
            st <= S_FIN;
          end
          S_FIN: begin
            if (!exc) instret <= instret + 64'd1;
            st <= S_INI;
          end
          default: st <= S_INI;
        endcase
      end
    end
  end
endmodule
