// rvsoc: RVSoC, a Linux-capable RV32IMAC computer system for a small FPGA.
//
// The main processor RVCoreM runs Linux with virtual memory; everything it
// reaches goes through the MMU (three TLBs and an Sv32 page walker). The
// I/O devices, a console and a disk, are VirtIO devices whose queue
// processing is done in software by the RV32I micro controller RVuc, which
// the kernel wakes by writing a QueueNotify register and which holds
// RVCoreM while it works. Main memory and disk both live in the DRAM
// (lower and upper 64 MB), behind a 128 KB direct-mapped write-through
// cache. The loader takes the initialisation image from the serial line
// and afterwards carries the terminal.
//
// Clocks: core_clk (104 MHz) runs the processors, MMU, cache and the I/O
// blocks; mem_clk (81.25 MHz, the MIG user clock) runs the DRAM controller.
// Two asynchronous FIFOs cross between them. Each reset is synchronous to
// its own clock. The clock generators and the MIG IP itself are outside;
// the MIG user interface is brought out as app_* ports.
// Interrupts: the console and disk interrupt status and the console's
// keyboard FIFO drive the machine external interrupt (and the supervisor
// one); the timer interrupt is an input pin. The wiring of the blocks
// follows the paper's organisation; interrupt wiring is this design's.
module rvsoc
  import rv_pkg::*;
#(
  parameter logic [31:0] RESET_PC    = 32'h8000_0000,
  parameter int          TLB_ENTRIES = 32,
  parameter int          CACHE_BYTES = 131072,
  parameter int          LMEM_BYTES  = 8192,
  parameter int          CLK_HZ      = 104_000_000,
  parameter int          BAUD        = 8_000_000
) (
  input  logic          core_clk,
  input  logic          core_rst,
  input  logic          mem_clk,
  input  logic          mem_rst,
  // serial line to the host
  input  logic          uart_rxd,
  output logic          uart_txd,
  // timer interrupt (no timer in this design)
  input  logic          irq_timer,
  // MIG user interface
  output logic [26:0]   app_addr,
  output logic [2:0]    app_cmd,
  output logic          app_en,
  input  logic          app_rdy,
  output logic [127:0]  app_wdf_data,
  output logic [15:0]   app_wdf_mask,
  output logic          app_wdf_wren,
  output logic          app_wdf_end,
  input  logic          app_wdf_rdy,
  input  logic [127:0]  app_rd_data,
  input  logic          app_rd_data_valid,
  input  logic          app_rd_data_end,
  // status (instruction count for the board's display, step, statistics)
  output logic [63:0]   instret,
  output step_t         core_step,
  output logic          core_running,
  output logic          uc_busy,
  output logic [31:0]   cache_access,
  output logic [31:0]   cache_hit,
  output logic [15:0]   events     // one-cycle event strobes, see below
);
  // ------------------------------------------------------- loader
  mem_req_t   l_req;
  mem_rsp_t   l_rsp;
  logic       uc_we, core_hold, con_rx_v, con_tx_v, con_tx_busy;
  logic [31:0] uc_addr, uc_data;
  logic [7:0] con_rx_b, con_tx_b;
  loader #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_loader (
    .clk(core_clk), .rst(core_rst), .rxd(uart_rxd), .txd(uart_txd),
    .mreq(l_req), .mrsp(l_rsp), .uc_we, .uc_addr, .uc_data, .core_hold,
    .con_rx_valid(con_rx_v), .con_rx_byte(con_rx_b),
    .con_tx_valid(con_tx_v), .con_tx_byte(con_tx_b), .con_tx_busy
  );

  // ------------------------------------------------------- RVCoreM
  core_req_t c_req;
  core_rsp_t c_rsp;
  logic [1:0]  priv;
  logic [31:0] satp;
  logic        sum, mxr, tlb_flush, core_stall, irq_ext;
  logic        ev_div, ev_amo, ev_trap, ev_c, ev_bufhit, ev_two, ev_s1, ev_s2, ev_s3;
  wire         c_rst = core_rst | core_hold;
  rvcorem #(.RESET_PC(RESET_PC)) u_core (
    .clk(core_clk), .rst(c_rst), .stall(core_stall), .mreq(c_req), .mrsp(c_rsp),
    .irq_mtip(irq_timer), .irq_meip(irq_ext), .irq_seip(irq_ext),
    .priv, .satp, .sum, .mxr, .tlb_flush, .step(core_step), .instret,
    .ev_div, .ev_amo, .ev_trap, .ev_compressed(ev_c), .ev_buf_hit(ev_bufhit),
    .ev_two_access(ev_two), .ev_skip_ex1_wb(ev_s1), .ev_skip_ld_wb(ev_s2), .ev_skip_ld_sd(ev_s3)
  );
  assign core_running = !c_rst;

  // ---------------------------------------------------------- RVuc
  logic        u_req_v, u_we, u_ready, uc_run;
  logic [3:0]  u_be;
  logic [31:0] u_addr, u_wdata, u_rdata, uc_n;
  rvuc #(.LMEM_BYTES(LMEM_BYTES)) u_uc (
    .clk(core_clk), .rst(core_rst), .run(uc_run), .busy(uc_busy),
    .w_data_req(u_req_v), .w_data_we(u_we), .w_data_be(u_be), .w_data_addr(u_addr),
    .w_data_wdata(u_wdata), .w_data_data(u_rdata), .w_data_ready(u_ready),
    .prog_we(uc_we), .prog_addr(uc_addr), .prog_data(uc_data), .n_insn(uc_n)
  );
  mem_req_t u_mreq;
  mem_rsp_t u_mrsp;
  assign u_mreq  = '{valid: u_req_v, we: u_we, addr: u_addr, be: u_be, wdata: u_wdata};
  assign u_rdata = u_mrsp.rdata;
  assign u_ready = u_mrsp.ready;

  // ----------------------------------------------------------- MMU
  mem_req_t d_req, con_req, dsk_req;
  mem_rsp_t d_rsp, con_rsp, dsk_rsp;
  logic     ev_hit, ev_miss, ev_pf;
  mmu #(.TLB_ENTRIES(TLB_ENTRIES)) u_mmu (
    .clk(core_clk), .rst(core_rst),
    .creq(c_req), .crsp(c_rsp), .priv, .satp, .sum, .mxr, .tlb_flush, .core_stall,
    .ureq(u_mreq), .ursp(u_mrsp), .uc_busy, .lreq(l_req), .lrsp(l_rsp),
    .dreq(d_req), .drsp(d_rsp), .con_req, .con_rsp, .dsk_req, .dsk_rsp,
    .ev_tlb_hit(ev_hit), .ev_tlb_miss(ev_miss), .ev_walk_fault(ev_pf)
  );

  // ------------------------------------------------ I/O registers
  logic con_notify, con_irq, con_rx_irq, dsk_notify, dsk_irq;
  console u_console (
    .clk(core_clk), .rst(core_rst), .req(con_req), .rsp(con_rsp),
    .rx_valid(con_rx_v), .rx_byte(con_rx_b), .tx_valid(con_tx_v), .tx_byte(con_tx_b),
    .tx_busy(con_tx_busy), .notify(con_notify), .irq(con_irq), .rx_irq(con_rx_irq)
  );
  disk u_disk (
    .clk(core_clk), .rst(core_rst), .req(dsk_req), .rsp(dsk_rsp),
    .notify(dsk_notify), .irq(dsk_irq)
  );
  assign uc_run  = con_notify | dsk_notify;
  assign irq_ext = con_irq | dsk_irq | con_rx_irq;

  // ---------------------------------------------------------- cache
  logic      dq_push, dq_full, dr_empty, dr_pop;
  dram_req_t dq_data;
  logic [127:0] dr_data;
  dram_cache #(.CACHE_BYTES(CACHE_BYTES)) u_cache (
    .clk(core_clk), .rst(core_rst), .req(d_req), .rsp(d_rsp),
    .dq_push, .dq_data, .dq_full, .dr_empty, .dr_data, .dr_pop,
    .n_access(cache_access), .n_hit(cache_hit)
  );

  // -------------------------------------------- clock crossing FIFOs
  logic      rq_empty, rq_pop, rs_push, rs_full;
  dram_req_t rq_data;
  logic [127:0] rs_data;
  async_fifo #(.WIDTH($bits(dram_req_t)), .DEPTH(4)) u_req_fifo (
    .wclk(core_clk), .wrst(core_rst), .winc(dq_push), .wdata(dq_data), .wfull(dq_full),
    .rclk(mem_clk), .rrst(mem_rst), .rinc(rq_pop), .rdata(rq_data), .rempty(rq_empty)
  );
  async_fifo #(.WIDTH(128), .DEPTH(4)) u_rsp_fifo (
    .wclk(mem_clk), .wrst(mem_rst), .winc(rs_push), .wdata(rs_data), .wfull(rs_full),
    .rclk(core_clk), .rrst(core_rst), .rinc(dr_pop), .rdata(dr_data), .rempty(dr_empty)
  );

  // ------------------------------------------------ DRAM controller
  dram_ctrl u_dram (
    .clk(mem_clk), .rst(mem_rst),
    .rq_empty, .rq_data, .rq_pop, .rs_push, .rs_data, .rs_full,
    .app_addr, .app_cmd, .app_en, .app_rdy, .app_wdf_data, .app_wdf_mask,
    .app_wdf_wren, .app_wdf_end, .app_wdf_rdy, .app_rd_data, .app_rd_data_valid, .app_rd_data_end
  );

  // event strobes: 0 div, 1 amo, 2 trap, 3 compressed, 4 16-bit buffer hit,
  // 5 two-access fetch, 6 EX1->WB skip, 7 LD->WB skip, 8 LD->SD skip,
  // 9 TLB hit, 10 TLB miss, 11 page fault from walk, 12 RVuc started,
  // 13 core stalled by RVuc, 14 keyboard character received, 15 character sent
  assign events = {con_tx_v, con_rx_v, core_stall && !c_rst, uc_run, ev_pf, ev_miss, ev_hit,
                   ev_s3, ev_s2, ev_s1, ev_two, ev_bufhit, ev_c, ev_trap, ev_amo, ev_div};

  logic unused;
  assign unused = ^uc_n;
endmodule
