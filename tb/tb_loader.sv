// tb_loader: drives the serial line at 8 Mbaud (13 clocks per bit at
// 104 MHz) with a memory packet of 10 bytes (two full words and a partial
// word), an RVuc packet of 8 bytes and the start packet. Checks the memory
// words (held requests with random ready delay), the RVuc port writes, that
// RVCoreM is held until start, that later bytes reach the console, and that
// a console character comes back out on txd with the right framing.
`include "tb_check.svh"
module tb_loader;
  import rv_pkg::*;
  int checks = 0, failures = 0;
  localparam int CPB = 13;
  logic clk = 0, rst = 1, rxd = 1, txd;
  mem_req_t mreq; mem_rsp_t mrsp;
  logic uc_we, core_hold, con_rx_valid, con_tx_valid = 0, con_tx_busy;
  logic [31:0] uc_addr, uc_data;
  logic [7:0] con_rx_byte, con_tx_byte;
  loader #(.CLK_HZ(104_000_000), .BAUD(8_000_000)) dut (.*);
  always #5 clk = ~clk;

  logic [31:0] mem [logic [31:0]];
  logic [31:0] ucm [logic [31:0]];
  int n_rx = 0; logic [7:0] last_rx;
  always @(posedge clk) begin
    mrsp.ready <= 1'b0; mrsp.rdata <= '0;
    if (!rst && mreq.valid && !mrsp.ready && ($urandom % 4 == 0)) begin
      mrsp.ready <= 1'b1; mem[mreq.addr] = mreq.wdata;
    end
    if (!rst && uc_we) ucm[uc_addr] = uc_data;
    if (!rst && con_rx_valid) begin n_rx++; last_rx = con_rx_byte; end
  end

  task automatic send(input logic [7:0] b);
    rxd = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(posedge clk); end
    rxd = 1; repeat (CPB) @(posedge clk);
  endtask
  task automatic send32(input logic [31:0] w);
    for (int i = 0; i < 4; i++) send(w[8*i +: 8]);
  endtask

  logic [7:0] got;
  initial begin
    mrsp = '0;
    repeat (4) @(posedge clk); rst = 0; repeat (20) @(posedge clk);
    send(8'h01); send32(32'h8000_0100); send32(10);
    for (int i = 0; i < 10; i++) send(8'(8'h10 + i));
    send(8'h02); send32(32'h0000_0040); send32(8);
    send32(32'hDEAD_BEEF); send32(32'h0010_0073);
    repeat (10) @(posedge clk);
    `CHECK(core_hold, "core held before start")
    send(8'h03); send32(0); send32(0);
    repeat (10) @(posedge clk);
    `CHECK(!core_hold, "core released")
    `CHECK_EQ(mem[32'h8000_0100], 32'h1312_1110, "word 0")
    `CHECK_EQ(mem[32'h8000_0104], 32'h1716_1514, "word 1")
    `CHECK_EQ(mem[32'h8000_0108], 32'h0000_1918, "partial word")
    `CHECK_EQ(mem.num(), 3, "three memory writes")
    `CHECK_EQ(ucm[32'h40], 32'hDEAD_BEEF, "uc word 0")
    `CHECK_EQ(ucm[32'h44], 32'h0010_0073, "uc word 1")
    `CHECK_EQ(n_rx, 0, "no console bytes during load")
    send(8'h61);
    repeat (5) @(posedge clk);
    `CHECK_EQ(n_rx, 1, "console byte after start") `CHECK_EQ(last_rx, 8'h61, "console byte value")
    // transmit path
    @(posedge clk); con_tx_byte = 8'hA5; con_tx_valid = 1; @(posedge clk); con_tx_valid = 0;
    wait (txd == 0);
    repeat (CPB / 2) @(posedge clk);
    `CHECK_EQ(txd, 1'b0, "start bit")
    for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); got[i] = txd; end
    repeat (CPB) @(posedge clk);
    `CHECK_EQ(txd, 1'b1, "stop bit")
    `CHECK_EQ(got, 8'hA5, "transmitted byte")
    `TB_DONE
  end
  initial begin repeat (200000) @(posedge clk); failures++; `TB_DONE end
endmodule
