// tb_page_walk: Sv32 walks over a hand-built two-level page table held in
// a word memory model. Checked: 4 KiB translation, A-bit write-back on a
// load and A+D on a store, a 4 MiB superpage, faults for a missing
// execute permission, an invalid level-1 entry and a user page accessed
// from S-mode without SUM (allowed with SUM), and the number of memory
// reads per walk (two, or one for a superpage).
`include "tb_check.svh"
module tb_page_walk;
  import rv_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, start = 0, sum = 0, mxr = 0;
  logic [31:0] vaddr, satp; acc_t kind; logic [1:0] priv;
  mem_req_t mreq; mem_rsp_t mrsp;
  logic done, fault, fill, fill_super; logic [19:0] fill_vpn; logic [21:0] fill_ppn;
  logic [31:0] pmem [logic [31:0]];
  int reads = 0, writes = 0;
  page_walk dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    mrsp.ready <= 0;
    if (mreq.valid && !mrsp.ready) begin
      if (mreq.we) begin pmem[mreq.addr] = mreq.wdata; writes++; end
      else begin mrsp.rdata <= pmem.exists(mreq.addr) ? pmem[mreq.addr] : 32'h0; reads++; end
      mrsp.ready <= 1;
    end
  end

  task automatic walk(input logic [31:0] va, input acc_t k, output logic f, output logic [21:0] p, output int nr);
    int r0 = reads;
    vaddr = va; kind = k; start = 1; @(posedge clk); #1 start = 0;
    while (!done) begin @(posedge clk); #1; end
    f = fault; p = fill_ppn; nr = reads - r0;
    if (!f) `CHECK(fill, "fill with done")
  endtask

  logic f; logic [21:0] p; int nr;
  initial begin
    mrsp = '0; vaddr = 0; kind = ACC_LD; priv = PRV_S;
    satp = 32'h8008_0000;                                 // MODE=1, root PPN 0x80000
    pmem[32'h8000_0004] = (32'h80001 << 10) | 32'h1;      // VPN1=1 -> table at 0x80001000
    pmem[32'h8000_1014] = (32'h80123 << 10) | 32'h7;      // VPN0=5: V R W, A=D=0
    pmem[32'h8000_1018] = (32'h80124 << 10) | 32'h3 | 32'hC0;   // VPN0=6: V R only, A D set
    pmem[32'h8000_101C] = (32'h80125 << 10) | 32'h13 | 32'h40;  // VPN0=7: V R U
    pmem[32'h8000_0008] = (32'h201 << 20) | 32'hCF;       // VPN1=2: superpage V R W X A D
    repeat (2) @(posedge clk); #1 rst = 0;
    walk(32'h0040_5ABC, ACC_LD, f, p, nr);
    `CHECK(!f, "load walk succeeds")
    `CHECK_EQ(p, 22'h80123, "4K frame")
    `CHECK_EQ(nr, 2, "two PTE reads")
    `CHECK_EQ(pmem[32'h8000_1014] & 32'hC0, 32'h40, "A set, D clear after load")
    walk(32'h0040_5ABC, ACC_SD, f, p, nr);
    `CHECK(!f, "store walk succeeds")
    `CHECK_EQ(pmem[32'h8000_1014] & 32'hC0, 32'hC0, "A and D set after store")
    walk(32'h0040_5000, ACC_IF, f, p, nr);
    `CHECK(f, "no X: instruction page fault")
    walk(32'h0040_6000, ACC_SD, f, p, nr);
    `CHECK(f, "read-only page: store fault")
    walk(32'h0081_2345, ACC_IF, f, p, nr);
    `CHECK(!f, "superpage fetch")
    `CHECK_EQ(p, 22'((32'h201 << 10) | 32'h012), "superpage frame")
    `CHECK_EQ(nr, 1, "one PTE read for superpage")
    walk(32'h00C0_0000, ACC_LD, f, p, nr);
    `CHECK(f, "invalid level-1 entry faults")
    walk(32'h0040_7000, ACC_LD, f, p, nr);
    `CHECK(f, "U page from S without SUM faults")
    sum = 1;
    walk(32'h0040_7000, ACC_LD, f, p, nr);
    `CHECK(!f, "U page from S with SUM")
    priv = PRV_U;
    walk(32'h0040_5000, ACC_LD, f, p, nr);
    `CHECK(f, "S page from U faults")
    `TB_DONE
  end
  initial begin repeat (5000) @(posedge clk); failures++; `TB_DONE end
endmodule
