// page_walk: Sv32 hardware page-table walker of the MMU.
//
// A TLB miss starts a walk. It is a six-state machine because the memory
// can be read only once per state and a new address has to be formed
// between the two reads:
//   PW1  form the level-1 PTE address (satp.PPN, VPN[1]) and read it
//   PW2  save the PTE; a leaf goes straight to PW5
//   PW3  form the level-0 PTE address (PTE.PPN, VPN[0]) and read it
//   PW4  save the PTE
//   PW5  judge: valid, well formed, aligned superpage, permission for the
//        access kind in the current mode (U bit, SUM, MXR)
//   PW6  fill the TLB of that kind and, if A (or D for a store) was clear,
//        write the PTE back with the bit set
// The walker ends with a one-cycle `done`, with `fault` set when the
// walk failed (a page fault for the core). The six states are the paper's;
// the PTE checks follow the RISC-V privileged specification.
// Memory port: one request is held until the one-cycle `ready`.
module page_walk
  import rv_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic [31:0] vaddr,
  input  acc_t        kind,
  input  logic [31:0] satp,
  input  logic [1:0]  priv,
  input  logic        sum,
  input  logic        mxr,
  // memory port (physical)
  output mem_req_t    mreq,
  input  mem_rsp_t    mrsp,
  // result
  output logic        done,
  output logic        fault,
  output logic        fill,       // one-cycle TLB fill for `kind`
  output logic [19:0] fill_vpn,
  output logic [21:0] fill_ppn,   // 4 KiB frame number of the page
  output logic        fill_super
);
  typedef enum logic [2:0] { PW_IDLE, PW1, PW2, PW3, PW4, PW5, PW6 } pw_t;
  pw_t st;

  logic [31:0] raw, pte1, pte0, pte_addr, leaf_addr, va;
  acc_t        k;
  logic        lvl1_leaf, wb_pending, bad;
  logic [31:0] leaf;

  always_comb begin
    leaf = lvl1_leaf ? pte1 : pte0;
    // permission judgement of the leaf (PW5)
    bad = 1'b0;
    if (!leaf[0] || (!leaf[1] && leaf[2])) bad = 1'b1;                 // V, W without R
    if (!lvl1_leaf && (!pte1[0] || (!pte1[1] && pte1[2]))) bad = 1'b1;
    if (!lvl1_leaf && !(leaf[1] | leaf[3])) bad = 1'b1;               // level-0 pointer
    if (lvl1_leaf && leaf[19:10] != 10'd0) bad = 1'b1;                // misaligned superpage
    unique case (k)
      ACC_IF:  if (!leaf[3]) bad = 1'b1;
      ACC_LD:  if (!(leaf[1] || (mxr && leaf[3]))) bad = 1'b1;
      default: if (!leaf[2]) bad = 1'b1;
    endcase
    if (priv == PRV_U && !leaf[4]) bad = 1'b1;
    if (priv == PRV_S && leaf[4] && (k == ACC_IF || !sum)) bad = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= PW_IDLE; done <= 1'b0; fault <= 1'b0; fill <= 1'b0;
      mreq <= '0; raw <= '0; pte1 <= '0; pte0 <= '0; pte_addr <= '0;
      leaf_addr <= '0; va <= '0; k <= ACC_IF; lvl1_leaf <= 1'b0;
      wb_pending <= 1'b0; fill_vpn <= '0; fill_ppn <= '0; fill_super <= 1'b0;
    end else begin
      done <= 1'b0;
      fill <= 1'b0;
      unique case (st)
        PW_IDLE: if (start) begin
          va   <= vaddr;
          k    <= kind;
          fault <= 1'b0;
          pte_addr <= {satp[19:0], vaddr[31:22], 2'b00};
          st   <= PW1;
        end
        PW1: begin
          if (!mreq.valid) begin
            mreq <= '{valid: 1'b1, we: 1'b0, addr: pte_addr, be: 4'hF, wdata: 32'h0};
          end else if (mrsp.ready) begin
            mreq.valid <= 1'b0;
            raw <= mrsp.rdata;
            leaf_addr <= pte_addr;
            st <= PW2;
          end
        end
        PW2: begin
          pte1 <= raw;
          lvl1_leaf <= raw[0] && (raw[1] || raw[3]);
          pte_addr  <= {raw[29:10], va[21:12], 2'b00};
          st <= (raw[0] && (raw[1] || raw[3])) ? PW5 : (raw[0] ? PW3 : PW5);
        end
        PW3: begin
          if (!mreq.valid) begin
            mreq <= '{valid: 1'b1, we: 1'b0, addr: pte_addr, be: 4'hF, wdata: 32'h0};
          end else if (mrsp.ready) begin
            mreq.valid <= 1'b0;
            raw <= mrsp.rdata;
            leaf_addr <= pte_addr;
            st <= PW4;
          end
        end
        PW4: begin
          pte0 <= raw;
          st <= PW5;
        end
        PW5: begin
          if (bad) begin
            fault <= 1'b1;
            done  <= 1'b1;
            st    <= PW_IDLE;
          end else begin
            wb_pending <= !leaf[6] || (k == ACC_SD && !leaf[7]);
            fill_vpn   <= va[31:12];
            fill_ppn   <= lvl1_leaf ? {leaf[31:20], va[21:12]} : leaf[31:10];
            fill_super <= lvl1_leaf;
            st <= PW6;
          end
        end
        PW6: begin
          if (!wb_pending) begin
            fill <= 1'b1;
            done <= 1'b1;
            st   <= PW_IDLE;
          end else if (!mreq.valid) begin
            mreq <= '{valid: 1'b1, we: 1'b1, addr: leaf_addr, be: 4'hF,
                      wdata: leaf | 32'h40 | ((k == ACC_SD) ? 32'h80 : 32'h0)};
          end else if (mrsp.ready) begin
            mreq.valid <= 1'b0;
            wb_pending <= 1'b0;
          end
        end
        default: st <= PW_IDLE;
      endcase
    end
  end
endmodule
