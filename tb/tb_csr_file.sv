// tb_csr_file: CSR reads and writes, a trap to M-mode and MRET, a delegated
// trap from U-mode to S-mode and SRET, the sstatus view of mstatus,
// interrupt pending/enable logic and the privilege check on reads.
`include "tb_check.svh"
module tb_csr_file;
  import rv_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic [11:0] raddr, waddr; logic [31:0] rdata, wdata, cause, tval, epc, trap_vec, ret_pc, irq_cause, satp;
  logic rill, we, trap, mret, sret, instret_inc, mtip, meip, seip, irq_take, sum, mxr;
  logic [1:0] priv;
  csr_file dut (.clk, .rst, .raddr, .rdata, .rillegal(rill), .we, .waddr, .wdata, .trap, .cause, .tval, .epc,
                .mret, .sret, .trap_vec, .ret_pc, .instret_inc, .irq_mtip(mtip), .irq_meip(meip), .irq_seip(seip),
                .irq_take, .irq_cause, .priv, .satp, .sum, .mxr);
  always #5 clk = ~clk;
  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    waddr = a; wdata = d; we = 1; @(posedge clk); #1 we = 0;
  endtask
  task automatic rd_chk(input logic [11:0] a, input logic [31:0] e, input string s);
    raddr = a; #1; `CHECK_EQ(rdata, e, s)
  endtask
  initial begin
    {we, trap, mret, sret, instret_inc, mtip, meip, seip} = '0; raddr = 0; waddr = 0; wdata = 0; cause = 0; tval = 0; epc = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    `CHECK_EQ(priv, PRV_M, "reset in M-mode")
    wr(CSR_MTVEC, 32'h8000_0100); rd_chk(CSR_MTVEC, 32'h8000_0100, "mtvec");
    wr(CSR_STVEC, 32'h8000_0200); wr(CSR_MSCRATCH, 32'h1234_5678); rd_chk(CSR_MSCRATCH, 32'h1234_5678, "mscratch");
    wr(CSR_SATP, 32'h8000_0123); `CHECK_EQ(satp, 32'h8000_0123, "satp out")
    rd_chk(CSR_MISA, 32'h4014_1105, "misa");
    // trap from M to M
    cause = EXC_ECALL_U + 3; tval = 0; epc = 32'h8000_0040; #1;
    `CHECK_EQ(trap_vec, 32'h8000_0100, "M trap vector")
    trap = 1; @(posedge clk); #1 trap = 0;
    rd_chk(CSR_MCAUSE, 32'd11, "mcause"); rd_chk(CSR_MEPC, 32'h8000_0040, "mepc");
    // prepare an MRET into U-mode: MPP=0
    wr(CSR_MSTATUS, 32'h0000_0000); wr(CSR_MEPC, 32'h0000_1000);
    mret = 1; #1; `CHECK_EQ(ret_pc, 32'h0000_1000, "mret target") @(posedge clk); #1 mret = 0;
    `CHECK_EQ(priv, PRV_U, "mret to U")
    raddr = CSR_MSTATUS; #1; `CHECK(rill, "U cannot read mstatus")
    // delegated page fault from U goes to S
    wr(CSR_MEDELEG, 32'h0000_B100);
    cause = EXC_LOAD_PF; tval = 32'hDEAD_B000; epc = 32'h0000_1004; #1;
    `CHECK_EQ(trap_vec, 32'h8000_0200, "S trap vector for delegated cause")
    trap = 1; @(posedge clk); #1 trap = 0;
    `CHECK_EQ(priv, PRV_S, "trap into S")
    rd_chk(CSR_SCAUSE, EXC_LOAD_PF, "scause"); rd_chk(CSR_STVAL, 32'hDEAD_B000, "stval"); rd_chk(CSR_SEPC, 32'h0000_1004, "sepc");
    rd_chk(CSR_SSTATUS, 32'h0000_0000, "sstatus SPP=U");
    sret = 1; @(posedge clk); #1 sret = 0;
    `CHECK_EQ(priv, PRV_U, "sret to U")
    // interrupts: machine timer enabled from U-mode
    mtip = 1; #1; `CHECK(!irq_take, "masked without mie")
    wr(CSR_MIE, 32'h80); #1;
    `CHECK(irq_take, "timer interrupt taken in U")
    `CHECK_EQ(irq_cause, 32'h8000_0007, "timer cause")
    mtip = 0; #1; `CHECK(!irq_take, "no pending")
    // counters
    instret_inc = 1; repeat (5) @(posedge clk); #1 instret_inc = 0;
    trap = 1; cause = 32'd2; @(posedge clk); #1 trap = 0;   // back to M to read counters
    rd_chk(CSR_MINSTRET, 32'd5, "minstret");
    wr(CSR_MSTATUS, 32'h000C_0000); `CHECK(sum && mxr, "sum/mxr")
    rd_chk(CSR_SSTATUS, 32'h000C_0000, "sstatus view");
    `TB_DONE
  end
  initial begin #100000; failures++; `TB_DONE end
endmodule
