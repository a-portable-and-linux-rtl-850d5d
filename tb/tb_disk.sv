// tb_disk: VirtIO block-device registers: identification, queue size and
// PFN, capacity in sectors, notify doorbell, interrupt status and device
// reset through Status = 0.
`include "tb_check.svh"
module tb_disk;
  import rv_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, notify, irq;
  mem_req_t req; mem_rsp_t rsp;
  disk dut (.*);
  always #5 clk = ~clk;
  int notes = 0;
  always @(posedge clk) if (!rst && notify) notes++;
  task automatic bus(input logic we, input logic [11:0] off, input logic [31:0] wd, output logic [31:0] rd);
    req = '{valid: 1, we: we, addr: {20'h40001, off}, be: 4'hF, wdata: wd};
    @(posedge clk); while (!rsp.ready) @(posedge clk);
    rd = rsp.rdata; #1 req.valid = 0; @(posedge clk); #1;
  endtask
  logic [31:0] d;
  initial begin
    req = '0;
    repeat (2) @(posedge clk); #1 rst = 0;
    bus(0, 12'h000, 0, d); `CHECK_EQ(d, 32'h74726976, "magic")
    bus(0, 12'h004, 0, d); `CHECK_EQ(d, 32'd1, "version")
    bus(0, 12'h008, 0, d); `CHECK_EQ(d, 32'd2, "block device id")
    bus(0, 12'h034, 0, d); `CHECK_EQ(d, 32'd8, "queue max")
    bus(1, 12'h038, 8, d); bus(0, 12'h038, 0, d); `CHECK_EQ(d, 32'd8, "queue num")
    bus(1, 12'h040, 32'h80123, d); bus(0, 12'h040, 0, d); `CHECK_EQ(d, 32'h80123, "queue pfn")
    bus(0, 12'h100, 0, d); `CHECK_EQ(d, 32'd131072, "capacity = 64 MB of sectors")
    bus(1, 12'h050, 0, d); bus(1, 12'h050, 0, d); `CHECK_EQ(notes, 2, "two notifies")
    bus(1, 12'h060, 1, d); bus(0, 12'h060, 0, d); `CHECK_EQ(d, 32'd1, "interrupt status") `CHECK(irq, "irq")
    bus(1, 12'h070, 0, d); `CHECK(!irq, "reset clears interrupt")
    bus(0, 12'h040, 0, d); `CHECK_EQ(d, 32'h0, "reset clears pfn")
    `TB_DONE
  end
  initial begin repeat (5000) @(posedge clk); failures++; `TB_DONE end
endmodule
