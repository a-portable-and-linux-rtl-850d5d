// tb_dram_ctrl: the DRAM controller between queue models and the memory
// controller model. Writes with random byte masks and line reads; read
// lines are checked against a reference, and the number of commands seen
// by the model against the number of requests.
`include "tb_check.svh"
module tb_dram_ctrl;
  import rv_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic rq_empty = 1, rq_pop, rs_push, rs_full = 0;
  dram_req_t rq_data; logic [127:0] rs_data;
  logic [26:0] app_addr; logic [2:0] app_cmd; logic app_en, app_rdy, app_wdf_wren, app_wdf_end, app_wdf_rdy;
  logic [127:0] app_wdf_data, app_rd_data; logic [15:0] app_wdf_mask; logic app_rd_data_valid, app_rd_data_end;
  dram_ctrl dut (.*);
  mig_model #(.LINES(256)) u_mig (.*);
  always #6 clk = ~clk;
  logic [127:0] refl [256];
  int nreq = 0, base = 0;
  task automatic send(input dram_req_t r);
    rq_data = r; rq_empty = 0;
    @(posedge clk); while (!rq_pop) @(posedge clk);
    #1 rq_empty = 1;
    nreq++;
  endtask
  initial begin
    for (int i = 0; i < 256; i++) begin u_mig.mem[i] = {4{$urandom()}}; refl[i] = u_mig.mem[i]; end
    rq_data = '0;
    repeat (3) @(posedge clk); #1 rst = 0; base = u_mig.n_reads + u_mig.n_writes;
    for (int i = 0; i < 300; i++) begin
      automatic int line = $urandom() % 256;
      if ($urandom() % 2) begin
        automatic logic [15:0] m = 16'($urandom());
        automatic logic [127:0] d = {$urandom(), $urandom(), $urandom(), $urandom()};
        send('{we: 1, addr: 27'(line << 4), mask: m, wdata: d});
        for (int b = 0; b < 16; b++) if (m[b]) refl[line][8*b +: 8] = d[8*b +: 8];
      end else begin
        send('{we: 0, addr: 27'(line << 4), mask: '1, wdata: '0});
        while (!rs_push) @(posedge clk);
        `CHECK_EQ(rs_data, refl[line], $sformatf("line %0d", line))
      end
      repeat (2) @(posedge clk);
    end
    `CHECK_EQ(u_mig.n_reads + u_mig.n_writes - base, nreq, "one command per request")
    `TB_DONE
  end
  initial begin #2000000; failures++; `TB_DONE end
endmodule
