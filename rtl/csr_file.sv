// csr_file: control and status registers and the privilege mode of RVCoreM.
//
// Holds the machine- and supervisor-level CSRs that a Linux kernel and its
// firmware use (mstatus/sstatus, misa, medeleg, mideleg, mie/sie,
// mip/sip, mtvec/stvec, m/s-scratch, m/s-epc, m/s-cause, m/s-tval, satp,
// counters, mhartid) and the current privilege mode. Reads are
// asynchronous, as the CSRs are one of the asynchronous-memory units of the
// core; a CSR instruction's new value, a trap or an xRET is applied at the
// clock edge of the COM step.
//
// A trap goes to S-mode when it happens in S or U mode and the cause is
// delegated (medeleg/mideleg), else to M-mode; mstatus' interrupt-enable
// stack and xPP are updated as the privileged specification says, and
// trap_vec gives the handler address (direct mode). irq_take/irq_cause
// report an enabled pending interrupt; the core takes it at an
// instruction boundary. The register set and interrupt handling are
// this design's reading of the privileged spec: the paper only says the
// CSRs hold the mode and exception state.
module csr_file
  import rv_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // read (OF step)
  input  logic [11:0] raddr,
  output logic [31:0] rdata,
  output logic        rillegal,   // no such CSR, or not enough privilege
  // write (COM step)
  input  logic        we,
  input  logic [11:0] waddr,
  input  logic [31:0] wdata,
  // trap entry / return (COM step)
  input  logic        trap,
  input  logic [31:0] cause,      // bit 31 set for an interrupt
  input  logic [31:0] tval,
  input  logic [31:0] epc,
  input  logic        mret,
  input  logic        sret,
  output logic [31:0] trap_vec,   // where a trap goes, for the given cause
  output logic [31:0] ret_pc,     // mepc or sepc for mret/sret
  input  logic        instret_inc,
  // interrupt pins
  input  logic        irq_mtip,
  input  logic        irq_meip,
  input  logic        irq_seip,
  output logic        irq_take,
  output logic [31:0] irq_cause,
  // state used by the MMU
  output logic [1:0]  priv,
  output logic [31:0] satp,
  output logic        sum,
  output logic        mxr
);
  // mstatus fields kept
  logic sie, mie_b, spie, mpie, spp, sum_q, mxr_q;
  logic [1:0] mpp;
  logic [31:0] medeleg, mideleg, mie_r, mtvec, stvec, mscratch, sscratch;
  logic [31:0] mepc, sepc, mcause, scause, mtval, stval, satp_q;
  logic [31:0] mcounteren, scounteren;
  logic ssip, stip, seip_sw, msip;
  logic [63:0] mcycle, minstret;
  logic [1:0]  prv;

  logic [31:0] mstatus, mip, sstatus_mask;
  assign mstatus = {12'b0, mxr_q, sum_q, 5'b0, mpp, 2'b0, spp, mpie, 1'b0, spie, 1'b0, mie_b, 1'b0, sie, 1'b0};
  assign sstatus_mask = 32'h000C_0122;   // SIE SPIE SPP SUM MXR
  assign mip = {20'b0, irq_meip, 1'b0, (seip_sw | irq_seip), 1'b0, irq_mtip, 1'b0, stip, 1'b0, msip, 1'b0, ssip, 1'b0};

  assign priv = prv;
  assign satp = satp_q;
  assign sum  = sum_q;
  assign mxr  = mxr_q;

  // ------------------------------------------------------------- read
  always_comb begin
    rillegal = 1'b0;
    unique case (raddr)
      CSR_SSTATUS:    rdata = mstatus & sstatus_mask;
      CSR_SIE:        rdata = mie_r & mideleg;
      CSR_STVEC:      rdata = stvec;
      CSR_SCOUNTEREN: rdata = scounteren;
      CSR_SSCRATCH:   rdata = sscratch;
      CSR_SEPC:       rdata = sepc;
      CSR_SCAUSE:     rdata = scause;
      CSR_STVAL:      rdata = stval;
      CSR_SIP:        rdata = mip & mideleg;
      CSR_SATP:       rdata = satp_q;
      CSR_MSTATUS:    rdata = mstatus;
      CSR_MISA:       rdata = 32'h4014_1105;   // RV32 A C I M S U
      CSR_MEDELEG:    rdata = medeleg;
      CSR_MIDELEG:    rdata = mideleg;
      CSR_MIE:        rdata = mie_r;
      CSR_MTVEC:      rdata = mtvec;
      CSR_MCOUNTEREN: rdata = mcounteren;
      CSR_MSCRATCH:   rdata = mscratch;
      CSR_MEPC:       rdata = mepc;
      CSR_MCAUSE:     rdata = mcause;
      CSR_MTVAL:      rdata = mtval;
      CSR_MIP:        rdata = mip;
      CSR_MCYCLE,   CSR_CYCLE:    rdata = mcycle[31:0];
      CSR_MCYCLEH,  CSR_CYCLEH:   rdata = mcycle[63:32];
      CSR_MINSTRET, CSR_INSTRET:  rdata = minstret[31:0];
      CSR_MINSTRETH,CSR_INSTRETH: rdata = minstret[63:32];
      CSR_MHARTID:    rdata = 32'd0;
      default: begin rdata = 32'd0; rillegal = 1'b1; end
    endcase
    if (raddr[9:8] > prv) rillegal = 1'b1;
  end

  // ------------------------------------------------ trap target select
  logic to_s;
  logic [4:0] code;
  always_comb begin
    code = cause[4:0];
    if (cause[31]) to_s = (prv != PRV_M) && mideleg[code];
    else           to_s = (prv != PRV_M) && medeleg[code];
    trap_vec = to_s ? {stvec[31:2], 2'b00} : {mtvec[31:2], 2'b00};
    ret_pc   = mret ? mepc : sepc;
  end

  // ---------------------------------------------- pending interrupts
  logic [31:0] pend, m_en, s_en;
  always_comb begin
    pend = mip & mie_r;
    m_en = pend & ~mideleg & {32{(prv != PRV_M) || mie_b}};
    s_en = pend &  mideleg & {32{(prv == PRV_U) || (prv == PRV_S && sie)}};
    irq_take  = 1'b1;
    irq_cause = 32'h8000_0000;
    if      (m_en[11]) irq_cause[4:0] = 5'd11;
    else if (m_en[3])  irq_cause[4:0] = 5'd3;
    else if (m_en[7])  irq_cause[4:0] = 5'd7;
    else if (s_en[9] | m_en[9]) irq_cause[4:0] = 5'd9;
    else if (s_en[1] | m_en[1]) irq_cause[4:0] = 5'd1;
    else if (s_en[5] | m_en[5]) irq_cause[4:0] = 5'd5;
    else irq_take = 1'b0;
  end

  // ------------------------------------------------------------ write
  always_ff @(posedge clk) begin
    if (rst) begin
      prv <= PRV_M;
      sie <= 1'b0; mie_b <= 1'b0; spie <= 1'b0; mpie <= 1'b0; spp <= 1'b0;
      mpp <= PRV_M; sum_q <= 1'b0; mxr_q <= 1'b0;
      medeleg <= '0; mideleg <= '0; mie_r <= '0; mtvec <= '0; stvec <= '0;
      mscratch <= '0; sscratch <= '0; mepc <= '0; sepc <= '0;
      mcause <= '0; scause <= '0; mtval <= '0; stval <= '0; satp_q <= '0;
      mcounteren <= '0; scounteren <= '0;
      ssip <= 1'b0; stip <= 1'b0; seip_sw <= 1'b0; msip <= 1'b0;
      mcycle <= '0; minstret <= '0;
    end else begin
      mcycle <= mcycle + 64'd1;
      if (instret_inc) minstret <= minstret + 64'd1;
      if (trap) begin
        if (to_s) begin
          scause <= cause; sepc <= epc; stval <= tval;
          spie <= sie; sie <= 1'b0; spp <= prv[0];
          prv <= PRV_S;
        end else begin
          mcause <= cause; mepc <= epc; mtval <= tval;
          mpie <= mie_b; mie_b <= 1'b0; mpp <= prv;
          prv <= PRV_M;
        end
      end else if (mret) begin
        mie_b <= mpie; mpie <= 1'b1; prv <= mpp; mpp <= PRV_U;
      end else if (sret) begin
        sie <= spie; spie <= 1'b1; prv <= {1'b0, spp}; spp <= 1'b0;
      end else if (we) begin
        unique case (waddr)
          CSR_SSTATUS: begin
            sie <= wdata[1]; spie <= wdata[5]; spp <= wdata[8];
            sum_q <= wdata[18]; mxr_q <= wdata[19];
          end
          CSR_MSTATUS: begin
            sie <= wdata[1]; mie_b <= wdata[3]; spie <= wdata[5]; mpie <= wdata[7];
            spp <= wdata[8]; mpp <= (wdata[12:11] == 2'b10) ? PRV_U : wdata[12:11];
            sum_q <= wdata[18]; mxr_q <= wdata[19];
          end
          CSR_SIE:      mie_r <= (mie_r & ~mideleg) | (wdata & mideleg);
          CSR_MIE:      mie_r <= wdata & 32'h0000_0AAA;
          CSR_SIP:      if (mideleg[1]) ssip <= wdata[1];
          CSR_MIP:      begin ssip <= wdata[1]; stip <= wdata[5]; seip_sw <= wdata[9]; end
          CSR_STVEC:    stvec <= wdata;
          CSR_MTVEC:    mtvec <= wdata;
          CSR_SCOUNTEREN: scounteren <= wdata;
          CSR_MCOUNTEREN: mcounteren <= wdata;
          CSR_SSCRATCH: sscratch <= wdata;
          CSR_MSCRATCH: mscratch <= wdata;
          CSR_SEPC:     sepc <= {wdata[31:1], 1'b0};
          CSR_MEPC:     mepc <= {wdata[31:1], 1'b0};
          CSR_SCAUSE:   scause <= wdata;
          CSR_MCAUSE:   mcause <= wdata;
          CSR_STVAL:    stval <= wdata;
          CSR_MTVAL:    mtval <= wdata;
          CSR_SATP:     satp_q <= wdata;
          CSR_MEDELEG:  medeleg <= wdata & 32'h0000_B3FF;
          CSR_MIDELEG:  mideleg <= wdata & 32'h0000_0222;
          CSR_MCYCLE:   mcycle[31:0] <= wdata;
          CSR_MCYCLEH:  mcycle[63:32] <= wdata;
          CSR_MINSTRET: minstret[31:0] <= wdata;
          CSR_MINSTRETH:minstret[63:32] <= wdata;
          default: ;
        endcase
      end
    end
  end
endmodule
