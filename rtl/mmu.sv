// mmu: memory management unit and memory-mapped I/O of RVSoC.
//
// RVCoreM, RVuc and the loader all reach memory through this block.
// For RVCoreM it translates virtual addresses with Sv32: the access kind
// selects one of three direct-mapped TLBs (TLB_i for instruction fetch,
// TLB_r for loads, TLB_w for stores) and a miss starts the six-state page
// walker, which fills the TLB of that kind or reports a page fault.
// Translation is off in M-mode or when satp.MODE is 0. RVuc and the loader
// use physical addresses and have no TLB.
//
// Physical requests of the four sources (loader, RVuc, page walker, core)
// share one path, granted one at a time in that priority order, and are
// decoded by address:
//   0x8000_0000..0x83FF_FFFF  main memory   -> cache, DRAM bytes 0..64 MB
//   0x9000_0000..0x93FF_FFFF  disk area     -> cache, DRAM bytes 64..128 MB
//   0x4000_0000..0x4000_0FFF  console registers
//   0x4000_1000..0x4000_1FFF  disk registers
// Other addresses read zero and ignore writes. While RVuc runs, the core
// is held with `core_stall`.
// Every port is a request held until a one-cycle ready. The TLB
// organisation, the walker and the core hold follow the paper; the
// address map and the arbitration are this design's.
module mmu
  import rv_pkg::*;
#(
  parameter int TLB_ENTRIES = 32
) (
  input  logic        clk,
  input  logic        rst,
  // RVCoreM (virtual)
  input  core_req_t   creq,
  output core_rsp_t   crsp,
  input  logic [1:0]  priv,
  input  logic [31:0] satp,
  input  logic        sum,
  input  logic        mxr,
  input  logic        tlb_flush,
  output logic        core_stall,
  // RVuc and loader (physical)
  input  mem_req_t    ureq,
  output mem_rsp_t    ursp,
  input  logic        uc_busy,
  input  mem_req_t    lreq,
  output mem_rsp_t    lrsp,
  // cache (DRAM byte address in addr[26:0])
  output mem_req_t    dreq,
  input  mem_rsp_t    drsp,
  // register blocks (offset in addr[11:0])
  output mem_req_t    con_req,
  input  mem_rsp_t    con_rsp,
  output mem_req_t    dsk_req,
  input  mem_rsp_t    dsk_rsp,
  // events
  output logic        ev_tlb_hit,
  output logic        ev_tlb_miss,
  output logic        ev_walk_fault
);
  assign core_stall = uc_busy;

  // --------------------------------------------------------- TLBs
  logic        pw_fill, pw_done, pw_fault, pw_super;
  logic [19:0] pw_vpn;
  logic [21:0] pw_ppn;
  logic [2:0]  hit;
  logic [21:0] ppn [3];
  acc_t        wkind;

  for (genvar g = 0; g < 3; g++) begin : g_tlb
    tlb #(.ENTRIES(TLB_ENTRIES)) u_tlb (
      .clk, .rst, .flush(tlb_flush),
      .vpn(creq.addr[31:12]), .hit(hit[g]), .ppn(ppn[g]),
      .we(pw_fill && wkind == acc_t'(g)), .wvpn(pw_vpn), .wppn(pw_ppn), .wsuper(pw_super)
    );
  end

  // ----------------------------------------------------- page walker
  mem_req_t pw_req;
  mem_rsp_t pw_rsp;
  logic     pw_start;
  page_walk u_pw (
    .clk, .rst, .start(pw_start), .vaddr(creq.addr), .kind(creq.kind),
    .satp, .priv, .sum, .mxr,
    .mreq(pw_req), .mrsp(pw_rsp),
    .done(pw_done), .fault(pw_fault), .fill(pw_fill),
    .fill_vpn(pw_vpn), .fill_ppn(pw_ppn), .fill_super(pw_super)
  );

  // ------------------------------------------ core translation FSM
  typedef enum logic [1:0] { T_IDLE, T_WALK, T_PHYS, T_DONE } t_t;
  t_t       tst;
  mem_req_t cphys;
  mem_rsp_t cphys_rsp;

  wire translate = satp[31] && (priv != PRV_M);
  wire [1:0] ki  = 2'(creq.kind);

  always_ff @(posedge clk) begin
    if (rst) begin
      tst <= T_IDLE; cphys <= '0; crsp <= '0; pw_start <= 1'b0; wkind <= ACC_IF;
      ev_tlb_hit <= 1'b0; ev_tlb_miss <= 1'b0; ev_walk_fault <= 1'b0;
    end else begin
      crsp.ready <= 1'b0;
      pw_start <= 1'b0;
      ev_tlb_hit <= 1'b0; ev_tlb_miss <= 1'b0; ev_walk_fault <= 1'b0;
      unique case (tst)
        T_IDLE: if (creq.valid && !core_stall) begin
          if (!translate) begin
            cphys <= '{valid: 1'b1, we: creq.we, addr: creq.addr, be: creq.be, wdata: creq.wdata};
            tst <= T_PHYS;
          end else if (hit[ki]) begin
            cphys <= '{valid: 1'b1, we: creq.we, addr: {ppn[ki][19:0], creq.addr[11:0]},
                       be: creq.be, wdata: creq.wdata};
            ev_tlb_hit <= 1'b1;
            tst <= T_PHYS;
          end else begin
            pw_start <= 1'b1;
            wkind <= creq.kind;
            ev_tlb_miss <= 1'b1;
            tst <= T_WALK;
          end
        end
        T_WALK: if (pw_done) begin
          if (pw_fault) begin
            crsp <= '{ready: 1'b1, fault: 1'b1, rdata: 32'h0};
            ev_walk_fault <= 1'b1;
            tst <= T_DONE;
          end else begin
            tst <= T_IDLE;                 // look up again: it hits now
          end
        end
        T_PHYS: if (cphys_rsp.ready) begin
          cphys.valid <= 1'b0;
          crsp <= '{ready: 1'b1, fault: 1'b0, rdata: cphys_rsp.rdata};
          tst <= T_DONE;
        end
        default: tst <= T_IDLE;            // T_DONE: let the core drop valid
      endcase
    end
  end

  // ------------------------------------------- physical arbitration
  typedef enum logic [1:0] { O_LDR, O_UC, O_PW, O_CORE } own_t;
  own_t     owner;
  logic     busy;
  mem_req_t sel;
  mem_rsp_t prsp;

  always_comb begin
    unique case (owner)
      O_LDR:   sel = lreq;
      O_UC:    sel = ureq;
      O_PW:    sel = pw_req;
      default: sel = cphys;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; owner <= O_LDR;
    end else if (!busy) begin
      if      (lreq.valid)   begin owner <= O_LDR;  busy <= 1'b1; end
      else if (ureq.valid)   begin owner <= O_UC;   busy <= 1'b1; end
      else if (pw_req.valid) begin owner <= O_PW;   busy <= 1'b1; end
      else if (cphys.valid)  begin owner <= O_CORE; busy <= 1'b1; end
    end else if (prsp.ready) begin
      busy <= 1'b0;
    end
  end

  // address decode
  logic is_mem, is_disk_area, is_con, is_dsk;
  always_comb begin
    is_mem       = (sel.addr[31:26] == 6'b100000);
    is_disk_area = (sel.addr[31:26] == 6'b100100);
    is_con       = (sel.addr[31:12] == 20'h40000);
    is_dsk       = (sel.addr[31:12] == 20'h40001);
    dreq    = '0;
    con_req = '0;
    dsk_req = '0;
    dreq.we = sel.we; dreq.be = sel.be; dreq.wdata = sel.wdata;
    dreq.addr = {5'b0, is_disk_area, sel.addr[25:0]};
    con_req.we = sel.we; con_req.be = sel.be; con_req.wdata = sel.wdata;
    con_req.addr = {20'b0, sel.addr[11:0]};
    dsk_req.we = sel.we; dsk_req.be = sel.be; dsk_req.wdata = sel.wdata;
    dsk_req.addr = {20'b0, sel.addr[11:0]};
    dreq.valid    = busy && sel.valid && (is_mem || is_disk_area);
    con_req.valid = busy && sel.valid && is_con;
    dsk_req.valid = busy && sel.valid && is_dsk;
    if (dreq.valid)         prsp = drsp;
    else if (con_req.valid) prsp = con_rsp;
    else if (dsk_req.valid) prsp = dsk_rsp;
    else                    prsp = '{ready: busy && sel.valid, rdata: 32'h0};
    lrsp      = '{ready: prsp.ready && busy && owner == O_LDR,  rdata: prsp.rdata};
    ursp      = '{ready: prsp.ready && busy && owner == O_UC,   rdata: prsp.rdata};
    pw_rsp    = '{ready: prsp.ready && busy && owner == O_PW,   rdata: prsp.rdata};
    cphys_rsp = '{ready: prsp.ready && busy && owner == O_CORE, rdata: prsp.rdata};
  end
endmodule
