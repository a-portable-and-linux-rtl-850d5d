// tb_rvcorem: runs a machine-mode RV32IMAC test program on RVCoreM against
// a flat memory model (64 KiB at 0x8000_0000, random response latency,
// random stall cycles). Addresses 0xA000_0000.. answer with a page fault.
// The program writes its results to a table at 0x8000_8000 which the
// bench compares with precomputed values. It covers ALU and immediate
// forms, MUL/DIV/REMU, AMOADD/AMOSWAP, LR/SC (success and failure),
// compressed instructions including a 32-bit instruction that straddles a
// cache line, loops, JAL/JALR/AUIPC, byte loads, CSR access, and traps:
// ECALL, EBREAK, an illegal instruction, load and store page faults, and a
// machine timer interrupt. It also checks that every state-skip path and
// event strobe of the core happened.
`include "tb_check.svh"
module tb_rvcorem;
  import rv_pkg::*;
  import rv_asm::*;
  int checks = 0, failures = 0;
  // The timer line is a level held high all the time: it is taken only once
  // the program sets mie.MTIE and mstatus.MIE, and the handler masks it.
  logic clk = 0, rst = 1, stall = 0, irq_mtip = 1;
  core_req_t mreq; core_rsp_t mrsp;
  logic [1:0] priv; logic [31:0] satp; logic sum, mxr, tlb_flush;
  step_t step; logic [63:0] instret;
  logic ev_div, ev_amo, ev_trap, ev_compressed, ev_buf_hit, ev_two_access;
  logic ev_skip_ex1_wb, ev_skip_ld_wb, ev_skip_ld_sd;
  rvcorem #(.RESET_PC(32'h8000_0000), .LINE_BYTES(16)) dut (
    .clk, .rst, .stall, .mreq, .mrsp, .irq_mtip, .irq_meip(1'b0), .irq_seip(1'b0),
    .priv, .satp, .sum, .mxr, .tlb_flush, .step, .instret,
    .ev_div, .ev_amo, .ev_trap, .ev_compressed, .ev_buf_hit, .ev_two_access,
    .ev_skip_ex1_wb, .ev_skip_ld_wb, .ev_skip_ld_sd);
  always #5 clk = ~clk;

  // ------------------------------------------------------- memory model
  // Like the cache, a read returns the 32 bits that start at the halfword
  // address within the 16-byte line (the upper half is zero at offset 14).
  logic [31:0] mem [16384];
  function automatic logic [31:0] line_pick(logic [31:0] a);
    logic [127:0] l = {mem[{a[15:4], 2'd3}], mem[{a[15:4], 2'd2}], mem[{a[15:4], 2'd1}], mem[{a[15:4], 2'd0}]};
    l = l >> (16 * a[3:1]);
    return l[31:0];
  endfunction
  always @(posedge clk) begin
    mrsp <= '0;
    if (!rst && mreq.valid && !mrsp.ready && ($urandom % 3 == 0)) begin
      mrsp.ready <= 1'b1;
      if (mreq.addr[31:28] == 4'hA) mrsp.fault <= 1'b1;
      else if (mreq.we) begin
        for (int b = 0; b < 4; b++)
          if (mreq.be[b]) mem[mreq.addr[15:2]][8*b +: 8] <= mreq.wdata[8*b +: 8];
      end else mrsp.rdata <= line_pick(mreq.addr);
    end
    stall <= ($urandom % 16 == 0);
  end

  // ------------------------------------------------- program builder
  logic [15:0] hw [$];
  function automatic void e32(logic [31:0] w); hw.push_back(w[15:0]); hw.push_back(w[31:16]); endfunction
  function automatic void e16(logic [15:0] h); hw.push_back(h); endfunction
  function automatic int here(); return 2 * hw.size(); endfunction   // byte offset

  localparam int R = 31;                     // x31 = result table base
  int n_ev [9];
  always @(posedge clk) if (!rst) begin
    n_ev[0] += int'(ev_div);        n_ev[1] += int'(ev_amo);       n_ev[2] += int'(ev_trap);
    n_ev[3] += int'(ev_compressed); n_ev[4] += int'(ev_buf_hit);   n_ev[5] += int'(ev_two_access);
    n_ev[6] += int'(ev_skip_ex1_wb); n_ev[7] += int'(ev_skip_ld_wb); n_ev[8] += int'(ev_skip_ld_sd);
  end
  function automatic logic [31:0] res(int off); return mem[(32'h8000 + off) >> 2]; endfunction

  int jalr_at, loop_at;
  initial begin
    foreach (n_ev[i]) n_ev[i] = 0;
    foreach (mem[i]) mem[i] = 0;
    // ---- main program at 0x8000_0000
    e32(lui(R, 32'h80008));
    e32(lui(23, 32'h80001)); e32(csrrw(0, 12'h305, 23));   // mtvec = 0x8000_1000
    e32(addi(1, 0, 7)); e32(addi(2, 0, -3));
    e32(mul(3, 1, 2));  e32(sw(3, R, 0));                   // -21
    e32(div(4, 3, 1));  e32(sw(4, R, 4));                   // -3
    e32(remu(5, 1, 2)); e32(sw(5, R, 8));                   // 7
    e32(addi(6, 0, 100)); e32(sw(6, R, 12'h80)); e32(addi(7, R, 12'h80));
    e32(amo(5'b00000, 8, 7, 1)); e32(sw(8, R, 12));         // old 100, mem 107
    e32(lr_w(9, 7)); e32(sc_w(10, 7, 2));                   // 107, success 0, mem -3
    e32(sw(9, R, 16)); e32(sw(10, R, 20));
    e32(sc_w(11, 7, 1)); e32(sw(11, R, 24));                // no reservation: 1
    e32(amo(5'b00001, 12, 7, 1)); e32(sw(12, R, 28));       // swap: old -3, mem 7
    e16(c_li(13, 5)); e16(c_addi(13, 3)); e16(c_mv(14, 13)); e16(c_add(14, 13));   // 16
    while ((here() % 16) != 14) e16(c_nop());
    e32(sw(14, R, 32));                                     // straddles a line (buffer)
    while ((here() % 16) != 10) e16(c_nop());
    e32(jal(0, 4));                                         // jump to line offset 14:
    e32(addi(14, 14, 1));                                   // straddles, needs two reads
    e32(addi(15, 0, 0)); e32(addi(16, 0, 5));
    loop_at = here();
    e32(add(15, 15, 16)); e32(addi(16, 16, -1)); e32(bne(16, 0, -8));
    e32(sw(15, R, 36));                                     // 15
    e32(jal(17, 8)); e32(addi(15, 0, -1)); e32(sw(15, R, 40));   // 15
    e32(auipc(18, 0)); jalr_at = here(); e32(jalr(19, 18, 12)); e32(addi(15, 0, -1));
    e32(sw(19, R, 44)); e32(sw(15, R, 48));
    e32(addi(20, 0, -128)); e32(sb(20, R, 12'h50)); e32(lb(21, R, 12'h50)); e32(lbu(22, R, 12'h50));
    e32(sw(21, R, 52)); e32(sw(22, R, 56));
    e32(addi(27, 0, 0));
    e32(ecall()); e32(ebreak()); e32(32'hFFFF_FFFF);        // traps 11, 3, 2
    e32(lui(29, 32'hA0000)); e32(lw(30, 29, 0)); e32(sw(30, 29, 0));   // 13, 15
    e32(sw(27, R, 60));                                     // 44
    e32(addi(28, 0, 0)); e32(addi(26, 0, 12'h80)); e32(csrrw(0, 12'h304, 26));  // mie.MTIE
    e32(csrrs(0, 12'h300, 0)); e32(addi(26, 0, 8)); e32(csrrs(0, 12'h300, 26)); // mstatus.MIE
    e32(beq(28, 0, 0));                                     // wait for the interrupt
    e32(sw(28, R, 64));
    e32(csrrs(25, 12'hB02, 0)); e32(sw(25, R, 68));         // minstret
    e32(sw(14, R, 76));
    e32(addi(26, 0, 12'h600)); e32(sw(26, R, 72));          // done marker
    e32(jal(0, 0));
    foreach (hw[i]) mem[i / 2][16 * (i % 2) +: 16] = hw[i];
    // ---- trap handler at 0x8000_1000
    hw.delete();
    e32(csrrs(24, 12'h342, 0));
    e32(blt(24, 0, 24));
    e32(csrrs(25, 12'h341, 0)); e32(addi(25, 25, 4)); e32(csrrw(0, 12'h341, 25));
    e32(add(27, 27, 24)); e32(mret());
    e32(addi(28, 0, 1)); e32(csrrw(0, 12'h304, 0)); e32(mret());
    foreach (hw[i]) mem[1024 + i / 2][16 * (i % 2) +: 16] = hw[i];

    repeat (3) @(posedge clk); #1 rst = 0;
    fork
      wait (res(72) == 32'h600);
      begin repeat (20000) @(posedge clk); end
    join_any
    disable fork;
    `CHECK_EQ(res(72), 32'h600, "program finished")
    `CHECK_EQ(res(0), -32'sd21, "MUL")
    `CHECK_EQ(res(4), -32'sd3, "DIV")
    `CHECK_EQ(res(8), 32'd7, "REMU")
    `CHECK_EQ(res(12), 32'd100, "AMOADD old value")
    `CHECK_EQ(res(16), 32'd107, "LR value")
    `CHECK_EQ(res(20), 32'd0, "SC success")
    `CHECK_EQ(res(24), 32'd1, "SC without reservation fails")
    `CHECK_EQ(res(28), -32'sd3, "AMOSWAP old value")
    `CHECK_EQ(res(12'h80), 32'd7, "AMOSWAP new value")
    `CHECK_EQ(res(32), 32'd16, "compressed arithmetic and straddling store")
    `CHECK_EQ(res(76), 32'd17, "straddling jump target")
    `CHECK_EQ(res(36), 32'd15, "loop")
    `CHECK_EQ(res(40), 32'd15, "JAL skips")
    `CHECK_EQ(res(44), 32'h8000_0000 + jalr_at + 4, "JALR link")
    `CHECK_EQ(res(48), 32'd15, "JALR skips")
    `CHECK_EQ(res(52), 32'hFFFF_FF80, "LB")
    `CHECK_EQ(res(56), 32'h80, "LBU")
    `CHECK_EQ(res(60), 32'd44, "trap causes 11+3+2+13+15")
    `CHECK_EQ(res(64), 32'd1, "timer interrupt taken")
    `CHECK(res(68) > 60 && res(68) < 200, "minstret plausible")
    `CHECK_EQ(priv, PRV_M, "still machine mode")
    `CHECK_EQ(n_ev[2], 6, "six traps")
    `CHECK(n_ev[0] >= 2, "divider used")
    `CHECK_EQ(n_ev[1], 2, "two AMOs")
    `CHECK(n_ev[3] >= 4, "compressed instructions")
    `CHECK(n_ev[4] > 0, "16-bit buffer reused")
    `CHECK(n_ev[5] > 0, "line-straddling fetch")
    `CHECK(n_ev[6] > 0, "EX1 -> WB")
    `CHECK(n_ev[7] > 0, "LD -> WB")
    `CHECK(n_ev[8] > 0, "LD -> SD")
    `TB_DONE
  end
  initial begin repeat (30000) @(posedge clk); failures++; `TB_DONE end
endmodule
