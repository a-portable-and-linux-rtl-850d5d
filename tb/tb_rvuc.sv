// tb_rvuc: loads a small RV32I program into RVuc's local memory through the
// load port, starts it and lets it run to EBREAK. The program sums 1..10 in
// a loop, keeps data in local memory, reads a word from the external bus
// (served by a model here with random wait states), stores words, halves
// and bytes to the external bus, and uses shifts, sign-extending loads and
// LUI/AUIPC/JAL/JALR. The run is started a second time to check that the
// controller restarts from address 0.
`include "tb_check.svh"
module tb_rvuc;
  import rv_pkg::*;
  import rv_asm::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, run = 0, busy;
  logic w_data_req, w_data_we, w_data_ready;
  logic [3:0] w_data_be;
  logic [31:0] w_data_addr, w_data_wdata, w_data_data, n_insn;
  logic prog_we = 0; logic [31:0] prog_addr, prog_data;
  rvuc #(.LMEM_BYTES(8192)) dut (.*);
  always #5 clk = ~clk;

  // external memory model: 1 KB at 0x8000_0000, random latency
  logic [31:0] ext [256];
  int n_ext = 0;
  always @(posedge clk) begin
    w_data_ready <= 1'b0;
    if (w_data_req && !w_data_ready && ($urandom % 3 == 0)) begin
      w_data_ready <= 1'b1; n_ext++;
      if (w_data_we) begin
        for (int b = 0; b < 4; b++) if (w_data_be[b]) ext[w_data_addr[9:2]][8*b +: 8] <= w_data_wdata[8*b +: 8];
      end else w_data_data <= ext[w_data_addr[9:2]];
    end
  end

  logic [31:0] prog [$];
  initial begin
    // x1 = 0x8000_0000 (external base)
    prog.push_back(lui(1, 32'h80000));
    prog.push_back(addi(2, 0, 0));          // sum
    prog.push_back(addi(3, 0, 10));         // i
    prog.push_back(add(2, 2, 3));           // loop: sum += i
    prog.push_back(addi(3, 3, -1));
    prog.push_back(bne(3, 0, -8));
    prog.push_back(sw(2, 0, 12'h400));      // local mem[0x400] = 55
    prog.push_back(lw(4, 0, 12'h400));
    prog.push_back(lw(5, 1, 12'h010));      // external word
    prog.push_back(add(6, 4, 5));
    prog.push_back(sw(6, 1, 12'h020));      // ext[0x20] = 55 + ext[0x10]
    prog.push_back(lb(7, 1, 12'h010));      // sign-extended byte
    prog.push_back(sw(7, 1, 12'h024));
    prog.push_back(sh(3, 1, 12'h02A));      // halfword 0 at 0x2A
    prog.push_back(addi(8, 0, 12'h7A));
    prog.push_back(sb(8, 1, 12'h029));      // byte 0x7A at 0x29
    prog.push_back(slli(9, 2, 4));          // 55<<4
    prog.push_back(sw(9, 1, 12'h030));
    prog.push_back(jal(10, 8));             // skip next
    prog.push_back(addi(2, 0, -1));         // skipped
    prog.push_back(auipc(11, 0));           // x11 = pc
    prog.push_back(sw(11, 1, 12'h034));
    prog.push_back(sw(10, 1, 12'h038));     // link
    prog.push_back(ebreak());
    prog.push_back(addi(2, 0, -1));         // must not execute
  end

  task automatic start_run();
    @(posedge clk); #1 run = 1; @(posedge clk); #1 run = 0;
    fork
      begin wait (busy === 1'b1); wait (busy === 1'b0); end
      begin repeat (5000) @(posedge clk); failures++; end
    join_any
    disable fork;
    @(posedge clk);
  endtask

  initial begin
    foreach (ext[i]) ext[i] = 0;
    ext[4] = 32'h0000_0081;                 // word at 0x10 (byte 0x81 -> -127)
    repeat (2) @(posedge clk); #1 rst = 0;
    foreach (prog[i]) begin
      prog_we = 1; prog_addr = 4 * i; prog_data = prog[i]; @(posedge clk); #1;
    end
    prog_we = 0;
    `CHECK(!busy, "idle before run")
    start_run();
    `CHECK_EQ(ext[8], 32'd55 + 32'h81, "sum + external word")
    `CHECK_EQ(ext[9], 32'hFFFF_FF81, "LB sign extension")
    `CHECK_EQ(ext[10], 32'h0000_7A00, "SH/SB byte lanes")
    `CHECK_EQ(ext[12], 32'd55 << 4, "SLLI")
    `CHECK_EQ(ext[13], 32'd80, "AUIPC")
    `CHECK_EQ(ext[14], 32'd76, "JAL link")
    `CHECK_EQ(dut.lmem[12'h400 >> 2], 32'd55, "local memory store")
    `CHECK(n_insn > 40, "instructions counted")
    ext[8] = 0;
    start_run();
    `CHECK_EQ(ext[8], 32'd55 + 32'h81, "second run from address 0")
    `TB_DONE
  end
  initial begin repeat (30000) @(posedge clk); failures++; `TB_DONE end
endmodule
