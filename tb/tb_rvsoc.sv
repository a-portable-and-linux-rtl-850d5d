// tb_rvsoc: end-to-end test of the whole system at its default parameters
// (128 KiB cache, 32-entry TLBs, 8 KiB RVuc memory, 104 MHz core clock and
// 81.25 MHz memory clock, 8 Mbaud serial line) with a behavioural model of
// the DRAM controller IP.
//
// Flow:
//  1. The main program, its trap handler and an Sv32 page table are placed
//     in the DRAM model directly (standing in for a long serial download).
//  2. Over the serial line the bench sends RVuc's I/O program, a short
//     memory packet and the start packet, exactly as a host would.
//  3. RVCoreM boots in M-mode at 0x8000_0000, installs the trap vector and
//     satp, and drops to S-mode with MRET. In S-mode, with translation on,
//     it does MUL/DIV, an AMO, compressed code with line-straddling
//     instructions (one served from the 16-bit buffer, one needing two
//     reads), a load and a store to an unmapped page (page faults that the
//     M-mode handler skips), writes a character to the console and rings
//     the console's QueueNotify.
//  4. RVuc then runs while the core is stalled: it reads a message the core
//     left in main memory, writes a word back, prints "OK\n" on the console
//     (polling the transmitter's busy flag) and raises the console's
//     interrupt status before it stops at EBREAK.
//  5. The core polls the console receive register until the bench sends a
//     character and checks RVuc's results.
//  6. The core leaves a disk job in a mailbox word and rings the disk's
//     QueueNotify; RVuc copies two words from the disk area of DRAM
//     (0x9000_0000 upward) into main memory and raises the disk's interrupt
//     status. The core reads them back and the disk capacity, then finishes
//     with ECALL. (The model's DRAM is 1 MiB and wraps, so the disk words
//     sit at an offset that does not collide with the program.)
// The bench decodes the serial output, checks the results in DRAM, and
// counts every event line of the top level; any mechanism that never
// happened is a failure.
`include "tb_check.svh"
module tb_rvsoc;
  import rv_pkg::*;
  import rv_asm::*;
  int checks = 0, failures = 0;

  logic core_clk = 0, mem_clk = 0, core_rst = 1, mem_rst = 1, uart_rxd = 1, uart_txd;
  logic [26:0] app_addr; logic [2:0] app_cmd; logic app_en, app_rdy;
  logic [127:0] app_wdf_data, app_rd_data; logic [15:0] app_wdf_mask;
  logic app_wdf_wren, app_wdf_end, app_wdf_rdy, app_rd_data_valid, app_rd_data_end;
  logic [63:0] instret; step_t core_step; logic core_running, uc_busy;
  logic [31:0] cache_access, cache_hit; logic [15:0] events;

  rvsoc dut (
    .core_clk, .core_rst, .mem_clk, .mem_rst, .uart_rxd, .uart_txd, .irq_timer(1'b0),
    .app_addr, .app_cmd, .app_en, .app_rdy, .app_wdf_data, .app_wdf_mask, .app_wdf_wren,
    .app_wdf_end, .app_wdf_rdy, .app_rd_data, .app_rd_data_valid, .app_rd_data_end,
    .instret, .core_step, .core_running, .uc_busy, .cache_access, .cache_hit, .events);
  mig_model u_mig (
    .clk(mem_clk), .app_addr, .app_cmd, .app_en, .app_rdy, .app_wdf_data, .app_wdf_mask,
    .app_wdf_wren, .app_wdf_end, .app_wdf_rdy, .app_rd_data, .app_rd_data_valid, .app_rd_data_end);

  always #4808ps core_clk = ~core_clk;     // 104 MHz
  always #6154ps mem_clk  = ~mem_clk;      // 81.25 MHz
  localparam int CPB = 13;                 // 104 MHz / 8 Mbaud

  // ------------------------------------------------ DRAM backdoor
  // The model holds 1 MiB (65536 lines): everything used stays below that.
  function automatic void poke(logic [31:0] pa, logic [31:0] v);   // main memory word
    u_mig.mem[pa[25:4]][32 * pa[3:2] +: 32] = v;
  endfunction
  function automatic logic [31:0] peek(logic [31:0] pa);
    return u_mig.mem[pa[25:4]][32 * pa[3:2] +: 32];
  endfunction

  // ------------------------------------------------ program builder
  logic [15:0] hw [$];
  function automatic void e32(logic [31:0] w); hw.push_back(w[15:0]); hw.push_back(w[31:16]); endfunction
  function automatic void e16(logic [15:0] h); hw.push_back(h); endfunction
  function automatic int here(); return 2 * hw.size(); endfunction
  function automatic void put(logic [31:0] base);
    for (int i = 0; i < hw.size(); i += 2) poke(base + 2 * i, {hw[i + 1], hw[i]});
    hw.delete();
  endfunction
  function automatic logic [31:0] andi(int rd, int rs1, int imm); return i_t(imm, rs1, 7, rd, 7'b0010011); endfunction

  // ------------------------------------------------ serial line
  task automatic send(input logic [7:0] b);
    uart_rxd = 0; repeat (CPB) @(posedge core_clk);
    for (int i = 0; i < 8; i++) begin uart_rxd = b[i]; repeat (CPB) @(posedge core_clk); end
    uart_rxd = 1; repeat (CPB) @(posedge core_clk);
  endtask
  task automatic send32(input logic [31:0] w); for (int i = 0; i < 4; i++) send(w[8*i +: 8]); endtask

  string tx_text = "";
  initial begin : rx_monitor
    logic [7:0] c;
    forever begin
      @(negedge uart_txd);
      if (core_rst) continue;
      repeat (CPB / 2) @(posedge core_clk);
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge core_clk); c[i] = uart_txd; end
      repeat (CPB) @(posedge core_clk);
      tx_text = {tx_text, string'(c)};
    end
  end

  // ------------------------------------------------ event counters
  int n_ev [16];
  string ev_name [16] = '{"divider", "AMO", "trap", "compressed", "16-bit buffer hit",
                          "two-read fetch", "EX1->WB skip", "LD->WB skip", "LD->SD skip",
                          "TLB hit", "TLB miss / page walk", "page fault", "RVuc run",
                          "core stalled by RVuc", "console RX char", "console TX char"};
  always @(posedge core_clk) if (!core_rst)
    for (int i = 0; i < 16; i++) n_ev[i] += int'(events[i]);

  localparam logic [31:0] RES = 32'h8000_3000;   // S-mode VA 0xC000_0000
  logic [31:0] uc_prog [$];
  initial begin
    foreach (n_ev[i]) n_ev[i] = 0;
    for (int i = 0; i < 16384; i++) u_mig.mem[i] = '0;
    // ---------------- page table (root at 0x8001_0000)
    poke(32'h8001_0000 + 4 * 32'h200, (32'h80000 << 10) | 32'hCF);   // 0x8000_0000 4 MiB RWX
    poke(32'h8001_0000 + 4 * 32'h100, (32'h40000 << 10) | 32'hC7);   // 0x4000_0000 4 MiB RW (I/O)
    poke(32'h8001_0000 + 4 * 32'h300, (32'h80011 << 10) | 32'h01);   // 0xC000_0000 -> L0 table
    poke(32'h8001_1000, (32'h80003 << 10) | 32'h07);                 // 4 KiB RW, A=D=0
    // ---------------- M-mode trap handler at 0x8000_1000
    e32(csrrs(24, 12'h342, 0)); e32(addi(25, 0, 9)); e32(beq(24, 25, 24));
    e32(csrrs(26, 12'h341, 0)); e32(addi(26, 26, 4)); e32(csrrw(0, 12'h341, 26));
    e32(addi(27, 27, 1)); e32(mret());
    e32(lui(30, 32'h80002)); e32(sw(27, 30, 12'h14)); e32(addi(29, 0, 12'h600)); e32(sw(29, 30, 12'h10));
    e32(jal(0, 0));
    put(32'h8000_1000);
    // ---------------- boot (M-mode) at 0x8000_0000
    e32(addi(27, 0, 0));
    e32(lui(23, 32'h80001)); e32(csrrw(0, 12'h305, 23));              // mtvec
    e32(lui(22, 32'h80080)); e32(addi(22, 22, 12'h010)); e32(csrrw(0, 12'h180, 22));  // satp
    e32(lui(21, 1)); e32(addi(21, 21, -2048)); e32(csrrw(0, 12'h300, 21));             // MPP = S
    e32(auipc(20, 0)); e32(addi(20, 20, 16)); e32(csrrw(0, 12'h341, 20)); e32(mret());
    // ---------------- S-mode, translated
    e32(lui(31, 32'hC0000));
    e32(addi(1, 0, 7)); e32(addi(2, 0, -3));
    e32(mul(3, 1, 2)); e32(sw(3, 31, 0));
    e32(div(4, 3, 1)); e32(sw(4, 31, 4));
    e32(sw(2, 31, 12'h80)); e32(addi(7, 31, 12'h80));
    e32(amo(5'b00000, 8, 7, 1)); e32(lw(9, 31, 12'h80));
    e32(sw(8, 31, 12)); e32(sw(9, 31, 16));
    e16(c_li(13, 5)); e16(c_addi(13, 3)); e16(c_mv(14, 13)); e16(c_add(14, 13));
    while ((here() % 16) != 14) e16(c_nop());
    e32(sw(14, 31, 20));                                   // straddles, 16-bit buffer
    while ((here() % 16) != 10) e16(c_nop());
    e32(jal(0, 4)); e32(addi(14, 14, 1));                  // straddling jump target
    e32(sw(14, 31, 24));
    e32(lw(5, 0, 0)); e32(sw(5, 0, 0));                    // two page faults
    e32(lui(6, 32'h80002)); e32(lui(10, 32'hA5)); e32(addi(10, 10, -12'h4B1)); e32(sw(10, 6, 0));
    e32(lui(1, 32'h40000)); e32(addi(5, 0, 8'h53)); e32(sw(5, 1, 12'h80));   // 'S'
    e32(sw(0, 1, 12'h50));                                 // QueueNotify -> RVuc
    e32(lw(3, 1, 12'h84)); e32(andi(4, 3, 12'h100)); e32(beq(4, 0, -8));
    e32(sw(3, 31, 28));
    e32(lw(11, 1, 12'h60)); e32(sw(11, 31, 32));
    e32(lw(12, 6, 8)); e32(sw(12, 31, 36));
    e32(addi(5, 0, 1)); e32(sw(5, 6, 12'h20));             // mailbox: disk job
    e32(lui(1, 32'h40001)); e32(sw(0, 1, 12'h50));         // disk QueueNotify -> RVuc
    e32(lw(11, 1, 12'h60)); e32(sw(11, 31, 40));
    e32(lw(12, 6, 12'h100)); e32(sw(12, 31, 44));
    e32(lw(14, 1, 12'h100)); e32(sw(14, 31, 48));          // disk capacity
    e32(ecall());
    put(32'h8000_0000);
    poke(32'h9000_8000, 32'hD15C_0001);                    // "disk image" sector data
    poke(32'h9000_8004, 32'hD15C_0002);
    // ---------------- RVuc program (sent over the serial line)
    // Word 0x8000_2020 is a mailbox: 0 = console job, 1 = disk job.
    uc_prog = '{lui(1, 32'h80002), lw(8, 1, 12'h20), bne(8, 0, 60),
                lw(2, 1, 0), addi(6, 2, 1), sw(6, 1, 8),
                lui(3, 32'h40000), addi(7, 0, 3),
                lw(4, 3, 12'h80), bne(4, 0, -4),
                sw(2, 3, 12'h80), srli(2, 2, 8), addi(7, 7, -1), bne(7, 0, -20),
                addi(5, 0, 1), sw(5, 3, 12'h60), ebreak(),
                // disk job: copy two words from the disk area, raise the disk interrupt
                lui(9, 32'h90008), lw(10, 9, 0), sw(10, 1, 12'h100), lw(10, 9, 4), sw(10, 1, 12'h104),
                lui(3, 32'h40001), addi(5, 0, 1), sw(5, 3, 12'h60), ebreak()};

    repeat (5) @(posedge mem_clk); mem_rst = 0;
    repeat (5) @(posedge core_clk); core_rst = 0;
    repeat (20) @(posedge core_clk);
    `CHECK(!core_running, "core held before start")
    send(8'h02); send32(0); send32(4 * uc_prog.size());
    foreach (uc_prog[i]) send32(uc_prog[i]);
    send(8'h01); send32(32'h8000_2040); send32(8); send32(32'h1234_5678); send32(32'h9ABC_DEF0);
    send(8'h03); send32(0); send32(0);
    wait (tx_text.len() >= 4);
    send(8'h78);                                           // 'x' to the console
    while (peek(32'h8000_2010) != 32'h600) @(posedge core_clk);
    repeat (50) @(posedge core_clk);

    `CHECK_EQ(tx_text, "SOK\n", "console output: core then RVuc")
    `CHECK_EQ(peek(32'h8000_2040), 32'h1234_5678, "loader memory packet word 0")
    `CHECK_EQ(peek(32'h8000_2044), 32'h9ABC_DEF0, "loader memory packet word 1")
    `CHECK_EQ(peek(RES + 0), -32'sd21, "MUL in S-mode")
    `CHECK_EQ(peek(RES + 4), -32'sd3, "DIV")
    `CHECK_EQ(peek(RES + 12), -32'sd3, "AMOADD old value")
    `CHECK_EQ(peek(RES + 16), 32'd4, "AMOADD new value")
    `CHECK_EQ(peek(RES + 20), 32'd16, "compressed code, buffered straddle")
    `CHECK_EQ(peek(RES + 24), 32'd17, "two-read straddle")
    `CHECK_EQ(peek(RES + 28), 32'h178, "console RX register")
    `CHECK_EQ(peek(RES + 32), 32'd1, "RVuc set the interrupt status")
    `CHECK_EQ(peek(RES + 36), 32'h000A_4B50, "core reads RVuc's write")
    `CHECK_EQ(peek(32'h8000_2014), 32'd2, "two page faults handled")
    `CHECK_EQ(peek(RES + 40), 32'd1, "RVuc set the disk interrupt status")
    `CHECK_EQ(peek(RES + 44), 32'hD15C_0001, "disk data copied by RVuc, read by core")
    `CHECK_EQ(peek(32'h8000_2104), 32'hD15C_0002, "second disk word copied")
    `CHECK_EQ(peek(RES + 48), 32'd131072, "disk capacity register")
    `CHECK_EQ(n_ev[12], 2, "RVuc ran for the console and for the disk")
    `CHECK_EQ(peek(32'h8001_1000) & 32'hC0, 32'hC0, "walker set A and D")
    `CHECK(cache_hit > 0 && cache_hit < cache_access, "cache hits and misses")
    for (int i = 0; i < 16; i++) begin
      `CHECK(n_ev[i] > 0, ev_name[i])
      $display("event %-22s %0d", ev_name[i], n_ev[i]);
    end
    $display("instret=%0d cache access=%0d hit=%0d", instret, cache_access, cache_hit);
    `TB_DONE
  end
  initial begin
    repeat (400000) @(posedge core_clk);
    $display("timeout: tx='%s' instret=%0d step=%s", tx_text, instret, core_step.name());
    failures++;
    `TB_DONE
  end
endmodule
