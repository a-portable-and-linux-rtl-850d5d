// tb_ifetch_buf: the 16-bit Buffer. A byte-array memory answers 4-byte
// fetches after a random delay, giving only the bytes inside the 16-byte
// line (the rest random). Checked: aligned fetch (one access); a 32-bit
// instruction across a line served from the buffer (one access, to the next
// line); the same without the buffer (two accesses); a compressed
// instruction at the line end (one access); a page fault on the second half.
`include "tb_check.svh"
module tb_ifetch_buf;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, flush = 0, start = 0;
  logic [31:0] pc, mem_addr, mem_data, fault_addr, ir;
  logic mem_valid, mem_ready = 0, mem_fault = 0, done, fault, ev_buf_hit, ev_two_access;
  logic [7:0] mem [4096];
  int accesses = 0, bufhits = 0, twos = 0;
  logic [31:0] fault_page = 32'hFFFF_FFFF;
  ifetch_buf #(.LINE_BYTES(16)) dut (.*);
  always #5 clk = ~clk;

  // memory model
  always @(posedge clk) begin
    mem_ready <= 0;
    if (mem_valid && !mem_ready) begin
      repeat ($urandom() % 3) @(posedge clk);
      accesses++;
      mem_fault <= (mem_addr[31:12] == fault_page[31:12]);
      for (int b = 0; b < 4; b++)
        mem_data[8*b +: 8] <= ((mem_addr[3:0] + b) < 16) ? mem[(mem_addr + b) % 4096] : 8'($urandom());
      mem_ready <= 1;
    end
  end
  always @(posedge clk) if (!rst) begin if (ev_buf_hit) bufhits++; if (ev_two_access) twos++; end

  task automatic fetch(input logic [31:0] a, output logic [31:0] r, output logic f);
    pc = a; start = 1; @(posedge clk); #1 start = 0;
    while (!done) begin @(posedge clk); #1; end
    r = ir; f = fault;
  endtask

  logic [31:0] r; logic f; int a0;
  initial begin
    for (int i = 0; i < 4096; i++) mem[i] = 8'($urandom());
    // a compressed instruction at 0x10C, a 32-bit one at 0x10E..0x111
    mem[12'h10C] = 8'h01; mem[12'h10D] = 8'h00;                 // c.nop
    {mem[12'h111], mem[12'h110], mem[12'h10F], mem[12'h10E]} = 32'h0123_4567 | 32'h3;
    // a 32-bit instruction straddling 0x2FE
    {mem[12'h301], mem[12'h300], mem[12'h2FF], mem[12'h2FE]} = 32'hCAFE_0013;
    // compressed at 0x3FE
    mem[12'h3FE] = 8'h05; mem[12'h3FF] = 8'h45;
    pc = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    a0 = accesses; fetch(32'h100, r, f);
    `CHECK_EQ(r, {mem[12'h103], mem[12'h102], mem[12'h101], mem[12'h100]}, "aligned fetch")
    `CHECK_EQ(accesses - a0, 1, "aligned: one access")
    // sequential: 0x10C fetch fills the buffer with the halfword at 0x10E
    fetch(32'h10C, r, f);
    `CHECK_EQ(r[15:0], 16'h0001, "compressed at 0x10C")
    a0 = accesses; fetch(32'h10E, r, f);
    `CHECK_EQ(r, 32'h0123_4567, "cross-line via 16-bit Buffer")
    `CHECK_EQ(accesses - a0, 1, "buffer: one access")
    `CHECK_EQ(bufhits, 1, "buffer hit event")
    // without buffer: two accesses
    a0 = accesses; fetch(32'h2FE, r, f);
    `CHECK_EQ(r, 32'hCAFE_0013, "cross-line two accesses")
    `CHECK_EQ(accesses - a0, 2, "no buffer: two accesses")
    `CHECK_EQ(twos, 1, "two-access event")
    // compressed at line end: one access
    a0 = accesses; fetch(32'h3FE, r, f);
    `CHECK_EQ(r[15:0], 16'h4505, "compressed at line end")
    `CHECK_EQ(accesses - a0, 1, "compressed at line end: one access")
    // flush empties the buffer
    fetch(32'h10C, r, f);
    flush = 1; @(posedge clk); #1 flush = 0;
    a0 = accesses; fetch(32'h10E, r, f);
    `CHECK_EQ(r, 32'h0123_4567, "after flush still right")
    `CHECK_EQ(accesses - a0, 2, "after flush: two accesses")
    // page fault on the second half (next page faults)
    {mem[12'hFFF], mem[12'hFFE]} = 16'h0003;
    fault_page = 32'h0000_1000;
    fetch(32'hFFE, r, f);
    `CHECK(f, "fault on second half")
    `CHECK_EQ(fault_addr, 32'h0000_1000, "fault address")
    `TB_DONE
  end
  initial begin repeat (5000) @(posedge clk); failures++; `TB_DONE end
endmodule
