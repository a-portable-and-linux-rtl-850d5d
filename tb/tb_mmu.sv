// tb_mmu: the MMU with a word-addressed memory model behind the cache
// port and simple responders for the two register blocks. A page table in
// the model maps a 4 KiB page whose PTE has A and D clear, a read-only page,
// a 4 MiB superpage and leaves one region unmapped. Checks: physical access
// in M-mode, translated loads / stores / fetches in S-mode, TLB miss then
// hit, A and D bits written back by the walker, page faults (unmapped,
// store to read-only, U page from S-mode without SUM), the disk-area
// mapping, register-block decode, TLB flush, the loader > RVuc > core
// priority and the core hold while RVuc is busy.
`include "tb_check.svh"
module tb_mmu;
  import rv_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  core_req_t creq; core_rsp_t crsp;
  logic [1:0] priv; logic [31:0] satp; logic sum = 0, mxr = 0, tlb_flush = 0, core_stall, uc_busy = 0;
  mem_req_t ureq, lreq, dreq, con_req, dsk_req;
  mem_rsp_t ursp, lrsp, drsp, con_rsp, dsk_rsp;
  logic ev_tlb_hit, ev_tlb_miss, ev_walk_fault;
  mmu #(.TLB_ENTRIES(32)) dut (.*);
  always #5 clk = ~clk;

  logic [31:0] m [logic [24:0]];
  function automatic logic [31:0] rd(logic [31:0] pa);   // physical main-memory word
    logic [24:0] k = {1'b0, pa[25:2]};
    return m.exists(k) ? m[k] : 32'h0;
  endfunction
  always @(posedge clk) begin
    drsp.ready <= 1'b0; con_rsp.ready <= 1'b0; dsk_rsp.ready <= 1'b0;
    if (dreq.valid && !drsp.ready && ($urandom % 3 == 0)) begin
      drsp.ready <= 1'b1;
      if (dreq.we) m[dreq.addr[26:2]] = dreq.wdata;
      else drsp.rdata <= m.exists(dreq.addr[26:2]) ? m[dreq.addr[26:2]] : 32'h0;
    end
    if (con_req.valid && !con_rsp.ready) begin con_rsp.ready <= 1'b1; con_rsp.rdata <= 32'hC000_0000 | con_req.addr; end
    if (dsk_req.valid && !dsk_rsp.ready) begin dsk_rsp.ready <= 1'b1; dsk_rsp.rdata <= 32'hD000_0000 | dsk_req.addr; end
  end
  int hits = 0, misses = 0, wfaults = 0;
  always @(posedge clk) if (!rst) begin
    hits += int'(ev_tlb_hit); misses += int'(ev_tlb_miss); wfaults += int'(ev_walk_fault);
  end

  logic [31:0] data; logic fault;
  task automatic cacc(input acc_t k, input logic we, input logic [31:0] a, input logic [31:0] wd);
    creq = '{valid: 1, kind: k, we: we, addr: a, be: 4'hF, wdata: wd};
    @(posedge clk); while (!crsp.ready) @(posedge clk);
    data = crsp.rdata; fault = crsp.fault;
    #1 creq.valid = 0; @(posedge clk); #1;
  endtask
  task automatic pset(input logic [31:0] pa, input logic [31:0] v); m[{1'b0, pa[25:2]}] = v; endtask

  int t_u, t_l, t_c;
  initial begin
    creq = '0; ureq = '0; lreq = '0; drsp = '0; con_rsp = '0; dsk_rsp = '0;
    priv = PRV_M; satp = 0;
    // page table: root at 0x8010_0000, level-0 table at 0x8010_1000
    pset(32'h8010_0000, (32'h80101 << 10) | 32'h1);              // VPN1=0   -> table
    pset(32'h8010_1000 + 4, (32'h80200 << 10) | 32'h0F);         // VA 0x1000: RWX, A=D=0
    pset(32'h8010_1000 + 8, (32'h80201 << 10) | 32'h43);         // VA 0x2000: R, A
    pset(32'h8010_1000 + 12, (32'h80202 << 10) | 32'hDF);        // VA 0x3000: U RWX A D
    pset(32'h8010_0000 + 4 * 32'h300, (32'h80000 << 10) | 32'hCF); // VA 0xC000_0000: 4 MiB
    pset(32'h8020_0010, 32'h1111_1111);
    pset(32'h8000_0010, 32'h2222_2222);
    pset(32'h8020_1000, 32'h3333_3333);
    repeat (2) @(posedge clk); #1 rst = 0;

    cacc(ACC_LD, 0, 32'h8000_0010, 0); `CHECK_EQ(data, 32'h2222_2222, "M-mode physical load")
    `CHECK_EQ(misses, 0, "no TLB use in M-mode")
    cacc(ACC_LD, 0, 32'h4000_0008, 0); `CHECK_EQ(data, 32'hC000_0008, "console registers")
    cacc(ACC_LD, 0, 32'h4000_1100, 0); `CHECK_EQ(data, 32'hD000_0100, "disk registers")
    cacc(ACC_SD, 1, 32'h9000_0040, 32'h5A5A_0000); `CHECK_EQ(m[25'h100_0010], 32'h5A5A_0000, "disk area at DRAM 64 MB")
    cacc(ACC_LD, 0, 32'h5000_0000, 0); `CHECK_EQ(data, 32'h0, "unmapped physical reads zero")

    priv = PRV_S; satp = 32'h8000_0000 | 32'h80100;
    cacc(ACC_LD, 0, 32'h0000_1010, 0);
    `CHECK(!fault, "translated load ok") `CHECK_EQ(data, 32'h1111_1111, "translated load data")
    `CHECK_EQ(misses, 1, "first access misses")
    `CHECK_EQ(rd(32'h8010_1004) & 32'hC0, 32'h40, "A set, D still clear")
    cacc(ACC_LD, 0, 32'h0000_1014, 0);
    `CHECK_EQ(misses, 1, "second access hits") `CHECK_EQ(hits, 2, "hit counted")
    cacc(ACC_SD, 1, 32'h0000_1020, 32'hCAFE_F00D);
    `CHECK(!fault, "store ok") `CHECK_EQ(rd(32'h8020_0020), 32'hCAFE_F00D, "store data")
    `CHECK_EQ(rd(32'h8010_1004) & 32'hC0, 32'hC0, "D set by store walk")
    `CHECK_EQ(misses, 2, "TLB_w separate from TLB_r")
    cacc(ACC_IF, 0, 32'hC000_0010, 0);
    `CHECK(!fault, "superpage fetch") `CHECK_EQ(data, 32'h2222_2222, "superpage data")
    cacc(ACC_LD, 0, 32'hC000_0010, 0); `CHECK_EQ(data, 32'h2222_2222, "superpage load")
    cacc(ACC_LD, 0, 32'h0040_0000, 0); `CHECK(fault, "unmapped VA faults")
    cacc(ACC_LD, 0, 32'h0000_2000, 0); `CHECK(!fault, "read-only load ok") `CHECK_EQ(data, 32'h3333_3333, "ro data")
    cacc(ACC_SD, 1, 32'h0000_2000, 1); `CHECK(fault, "store to read-only faults")
    `CHECK_EQ(rd(32'h8020_1000), 32'h3333_3333, "faulting store wrote nothing")
    cacc(ACC_LD, 0, 32'h0000_3000, 0); `CHECK(fault, "U page from S without SUM faults")
    sum = 1;
    cacc(ACC_LD, 0, 32'h0000_3000, 0); `CHECK(!fault, "U page with SUM")
    sum = 0;
    priv = PRV_U;
    cacc(ACC_IF, 0, 32'h0000_3000, 0); `CHECK(!fault, "U fetch of U page")
    cacc(ACC_IF, 0, 32'h0000_1000, 0); `CHECK(fault, "U fetch of S page faults")
    `CHECK_EQ(wfaults, 4, "walk faults counted")
    priv = PRV_S;
    misses = 0;
    @(posedge clk); #1 tlb_flush = 1; @(posedge clk); #1 tlb_flush = 0;
    cacc(ACC_LD, 0, 32'h0000_1010, 0); `CHECK_EQ(misses, 1, "flush empties the TLB")

    // priority: loader > RVuc > core when all arrive together
    t_u = 0; t_l = 0; t_c = 0;
    lreq = '{valid: 1, we: 1, addr: 32'h8000_0100, be: 4'hF, wdata: 1};
    ureq = '{valid: 1, we: 1, addr: 32'h8000_0104, be: 4'hF, wdata: 2};
    creq = '{valid: 1, kind: ACC_SD, we: 1, addr: 32'h0000_1030, be: 4'hF, wdata: 3};
    for (int c = 1; c < 200 && (t_u == 0 || t_l == 0 || t_c == 0); c++) begin
      @(posedge clk);
      if (lrsp.ready) begin t_l = c; #1 lreq.valid = 0; end
      if (ursp.ready) begin t_u = c; #1 ureq.valid = 0; end
      if (crsp.ready) begin t_c = c; #1 creq.valid = 0; end
    end
    `CHECK(t_l > 0 && t_l < t_u && t_u < t_c, "loader, then RVuc, then core")
    `CHECK_EQ(rd(32'h8020_0030), 32'h3, "core store after arbitration")
    // RVuc busy holds the core
    @(posedge clk); #1 uc_busy = 1;
    `CHECK(core_stall, "core stall while RVuc busy")
    creq = '{valid: 1, kind: ACC_LD, we: 0, addr: 32'h0000_1010, be: 4'hF, wdata: 0};
    repeat (20) @(posedge clk);
    `CHECK(!crsp.ready, "core not served while held")
    #1 uc_busy = 0;
    while (!crsp.ready) @(posedge clk);
    `CHECK_EQ(crsp.rdata, 32'h1111_1111, "core served after release")
    #1 creq.valid = 0;
    `TB_DONE
  end
  initial begin repeat (20000) @(posedge clk); failures++; `TB_DONE end
endmodule
