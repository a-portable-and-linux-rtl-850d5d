// tb_tlb: fills and lookups of the direct-mapped TLB against a model that
// keeps one entry per index; checks hits, misses on tag mismatch, that a
// newer fill evicts the older page with the same index, superpage frame
// numbers, and flush.
`include "tb_check.svh"
module tb_tlb;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, flush = 0, we = 0, wsuper = 0, hit;
  logic [19:0] vpn, wvpn; logic [21:0] ppn, wppn;
  tlb #(.ENTRIES(32)) dut (.*);
  always #5 clk = ~clk;
  logic mv [32]; logic [19:0] mvpn [32]; logic [21:0] mppn [32];
  initial begin
    vpn = 0; wvpn = 0; wppn = 0;
    for (int i = 0; i < 32; i++) mv[i] = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 1000; i++) begin
      if ($urandom() % 2) begin
        we = 1; wvpn = 20'($urandom() % 256); wppn = 22'($urandom()); wsuper = 0;
        @(posedge clk); #1 we = 0;
        mv[wvpn % 32] = 1; mvpn[wvpn % 32] = wvpn; mppn[wvpn % 32] = wppn;
      end
      vpn = 20'($urandom() % 256); #1;
      `CHECK_EQ(hit, mv[vpn % 32] && mvpn[vpn % 32] == vpn, "hit")
      if (hit) `CHECK_EQ(ppn, mppn[vpn % 32], "ppn")
      if (i == 500) begin
        flush = 1; @(posedge clk); #1 flush = 0;
        for (int k = 0; k < 32; k++) mv[k] = 0;
      end
    end
    // superpage
    we = 1; wvpn = 20'h12345; wppn = 22'h3ABC00 | 22'h345; wsuper = 1; @(posedge clk); #1 we = 0;
    vpn = 20'h12345; #1;
    `CHECK(hit, "superpage hit")
    `CHECK_EQ(ppn, 22'h3ABF45, "superpage frame")
    `TB_DONE
  end
  initial begin repeat (100000) @(posedge clk); failures++; `TB_DONE end
endmodule
