// tb_console: VirtIO identification and queue registers of the console,
// the QueueNotify doorbell, interrupt set/acknowledge, sending a character,
// and the 16-entry keyboard FIFO: 20 characters arrive, the first 16 are
// read back in order and the rest were dropped.
`include "tb_check.svh"
module tb_console;
  import rv_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, rx_valid = 0, tx_valid, tx_busy = 0, notify, irq, rx_irq;
  logic [7:0] rx_byte, tx_byte;
  mem_req_t req; mem_rsp_t rsp;
  console #(.RX_DEPTH(16)) dut (.*);
  always #5 clk = ~clk;
  int notes = 0, txn = 0; logic [7:0] last_tx;
  always @(posedge clk) if (!rst) begin
    if (notify) notes++;
    if (tx_valid) begin txn++; last_tx = tx_byte; end
  end
  task automatic bus(input logic we, input logic [11:0] off, input logic [31:0] wd, output logic [31:0] rd);
    req = '{valid: 1, we: we, addr: {20'h40000, off}, be: 4'hF, wdata: wd};
    @(posedge clk); while (!rsp.ready) @(posedge clk);
    rd = rsp.rdata; #1 req.valid = 0; @(posedge clk); #1;
  endtask
  logic [31:0] d;
  initial begin
    req = '0; rx_byte = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    bus(0, 12'h000, 0, d); `CHECK_EQ(d, 32'h74726976, "magic")
    bus(0, 12'h008, 0, d); `CHECK_EQ(d, 32'd3, "console device id")
    bus(1, 12'h030, 1, d); bus(1, 12'h040, 32'h1234, d); bus(0, 12'h040, 0, d);
    `CHECK_EQ(d, 32'h1234, "queue 1 PFN")
    bus(1, 12'h030, 0, d); bus(0, 12'h040, 0, d); `CHECK_EQ(d, 32'h0, "queue 0 PFN separate")
    bus(1, 12'h050, 1, d); `CHECK_EQ(notes, 1, "QueueNotify raises notify")
    bus(1, 12'h060, 1, d); `CHECK(irq, "interrupt set")
    bus(1, 12'h064, 1, d); `CHECK(!irq, "interrupt acknowledged")
    bus(1, 12'h080, 32'h41, d); `CHECK_EQ(txn, 1, "one character sent") `CHECK_EQ(last_tx, 8'h41, "character")
    tx_busy = 1; bus(0, 12'h080, 0, d); `CHECK_EQ(d, 32'd1, "tx busy visible") tx_busy = 0;
    for (int i = 0; i < 20; i++) begin
      rx_byte = 8'(8'h30 + i); rx_valid = 1; @(posedge clk); #1 rx_valid = 0; @(posedge clk); #1;
    end
    `CHECK(rx_irq, "rx pending")
    bus(0, 12'h088, 0, d); `CHECK_EQ(d, 32'd16, "FIFO holds 16")
    for (int i = 0; i < 16; i++) begin
      bus(0, 12'h084, 0, d); `CHECK_EQ(d, 32'h100 | (32'h30 + i), "FIFO order")
    end
    bus(0, 12'h084, 0, d); `CHECK_EQ(d, 32'h0, "empty read")
    `CHECK(!rx_irq, "rx drained")
    `TB_DONE
  end
  initial begin repeat (5000) @(posedge clk); failures++; `TB_DONE end
endmodule
