// tb_async_fifo: a writer on a 104 MHz-like clock and a reader on an
// 81.25 MHz-like clock move 2000 random words with random stalls on both
// sides; checked: order and values, full never overrun, empty never
// underrun.
`include "tb_check.svh"
module tb_async_fifo;
  int checks = 0, failures = 0;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1, winc = 0, rinc = 0, wfull, rempty;
  logic [31:0] wdata, rdata;
  async_fifo #(.WIDTH(32), .DEPTH(4)) dut (.*);
  always #4.8 wclk = ~wclk;
  always #6.15 rclk = ~rclk;
  logic [31:0] q[$];
  int nw = 0, nr = 0;
  always @(posedge wclk) if (!wrst) begin
    if (winc && !wfull) begin q.push_back(wdata); nw++; end
    winc <= (nw < 2000) && ($urandom() % 3 != 0);
    if (winc && !wfull || !winc) wdata <= $urandom();
  end
  always @(posedge rclk) if (!rrst) begin
    if (rinc && !rempty) begin
      `CHECK(q.size() > 0, "no underrun")
      if (q.size() > 0) `CHECK_EQ(rdata, q.pop_front(), "order and value")
      nr++;
    end
    rinc <= ($urandom() % 4 != 0);
  end
  initial begin
    wdata = 0;
    #30 wrst = 0; rrst = 0;
    wait (nr == 2000);
    `CHECK_EQ(q.size(), 0, "all words delivered")
    `TB_DONE
  end
  initial begin #400000; failures++; `TB_DONE end
endmodule
