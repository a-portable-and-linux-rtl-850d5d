// tb_dram_cache: random reads and byte/half/word writes from a small
// address pool (so lines conflict and hit) against a byte-array reference.
// The DRAM side is a model that answers line reads after a delay and
// applies masked writes in order. Checked: read data, write-through (the
// DRAM holds every write), invalidate-on-store (a read after a store sees
// the new data), one-cycle latency of a hit, and the hit counter.
`include "tb_check.svh"
module tb_dram_cache;
  import rv_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  mem_req_t req; mem_rsp_t rsp;
  logic dq_push, dq_full = 0, dr_empty = 1, dr_pop; dram_req_t dq_data; logic [127:0] dr_data;
  logic [31:0] n_access, n_hit;
  // a small cache so that lines conflict: 1 KB
  dram_cache #(.CACHE_BYTES(1024), .LINE_BYTES(16)) dut (.*);
  always #5 clk = ~clk;

  logic [7:0] dram [logic [26:0]];
  logic [7:0] refm [logic [26:0]];
  function automatic logic [7:0] rd8(logic [26:0] a, bit r);
    if (r) return refm.exists(a) ? refm[a] : 8'h00;
    return dram.exists(a) ? dram[a] : 8'h00;
  endfunction

  // DRAM side model
  always @(posedge clk) begin
    if (dr_pop) dr_empty <= 1;
    if (dq_push) begin
      if (dq_data.we) begin
        for (int b = 0; b < 16; b++) if (dq_data.mask[b]) dram[{dq_data.addr[26:4], 4'(b)}] = dq_data.wdata[8*b +: 8];
      end else begin
        automatic logic [26:0] a = dq_data.addr;
        fork begin
          repeat (3 + $urandom() % 5) @(posedge clk);
          for (int b = 0; b < 16; b++) dr_data[8*b +: 8] <= rd8({a[26:4], 4'(b)}, 0);
          dr_empty <= 0;
        end join_none
      end
    end
  end

  int lat, hits_seen = 0;
  task automatic access(input logic we, input logic [26:0] a, input logic [3:0] be, input logic [31:0] wd,
                        output logic [31:0] rd, output int l);
    req = '{valid: 1, we: we, addr: {5'b0, a}, be: be, wdata: wd};
    l = 0;
    @(posedge clk); #1;
    while (!rsp.ready) begin @(posedge clk); #1; l++; end
    rd = rsp.rdata;
    @(posedge clk); #1 req.valid = 0;
    @(posedge clk); #1;
  endtask

  logic [31:0] rd, e; logic [26:0] a; logic [3:0] be; int sz;
  initial begin
    req = '0;
    for (int i = 0; i < 4096; i++) begin dram[27'(i)] = 8'($urandom()); refm[27'(i)] = dram[27'(i)]; end
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 1500; i++) begin
      a = 27'(($urandom() % 4096) & ~32'h1);
      if ($urandom() % 3 == 0) begin
        sz = $urandom() % 3;
        if (sz == 2) begin a[1:0] = 0; be = 4'hF; end
        else if (sz == 1) begin a[0] = 0; be = 4'b0011 << a[1:0]; end
        else begin a = 27'($urandom() % 4096); be = 4'b0001 << a[1:0]; end
        e = $urandom();
        access(1, {a[26:2], 2'b00}, be, e, rd, lat);
        for (int b = 0; b < 4; b++) if (be[b]) refm[{a[26:2], 2'(b)}] = e[8*b +: 8];
      end else begin
        if (a[3:1] == 3'b111) a[1] = 0;       // keep the 4 bytes inside the line
        access(0, a, 4'hF, 0, rd, lat);
        for (int b = 0; b < 4; b++) e[8*b +: 8] = rd8(a + 27'(b), 1);
        `CHECK_EQ(rd, e, $sformatf("read %h", a))
        access(0, a, 4'hF, 0, rd, lat);        // the same again must hit
        `CHECK_EQ(rd, e, "re-read")
        `CHECK_EQ(lat, 0, "hit answers one cycle after the request")
      end
    end
    // write-through: DRAM matches the reference everywhere
    begin
      int bad = 0;
      for (int i = 0; i < 4096; i++) if (rd8(27'(i), 0) !== rd8(27'(i), 1)) bad++;
      `CHECK_EQ(bad, 0, "DRAM holds every write")
    end
    `CHECK(n_hit > n_access / 3 && n_hit < n_access, "hit counter plausible")
    `TB_DONE
  end
  initial begin repeat (200000) @(posedge clk); failures++; `TB_DONE end
endmodule
