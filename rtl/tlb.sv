// tlb: one direct-mapped Sv32 translation lookaside buffer (TLB_i, TLB_r
// or TLB_w).
//
// RVCoreM has one TLB per access kind: instruction fetch, load and store.
// An entry is filled only when the page walk found that the page allows
// that kind of access in the current mode, so a hit also grants the
// permission and no permission bits are stored. ENTRIES (32 in the paper)
// entries are indexed by the low bits of the virtual page number; the
// lookup is asynchronous. A 4 MiB superpage is stored with a flag, and its
// lower page-number bits come from the virtual address. flush clears all
// entries (SFENCE.VMA, satp write, privilege change).
module tlb #(
  parameter int ENTRIES = 32
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        flush,
  // lookup
  input  logic [19:0] vpn,
  output logic        hit,
  output logic [21:0] ppn,
  // fill
  input  logic        we,
  input  logic [19:0] wvpn,
  input  logic [21:0] wppn,
  input  logic        wsuper
);
  localparam int IW = $clog2(ENTRIES);
  logic [ENTRIES-1:0] valid;
  logic [19-IW:0]     tag   [ENTRIES];
  logic [21:0]        pn    [ENTRIES];
  logic               is_super [ENTRIES];

  wire [IW-1:0] idx  = vpn[IW-1:0];
  wire [IW-1:0] widx = wvpn[IW-1:0];

  always_comb begin
    hit = valid[idx] && (tag[idx] == vpn[19:IW]);
    ppn = is_super[idx] ? {pn[idx][21:10], vpn[9:0]} : pn[idx];
  end

  always_ff @(posedge clk) begin
    if (rst || flush) valid <= '0;
    else if (we)      valid[widx] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (we) begin
      tag[widx]   <= wvpn[19:IW];
      pn[widx]    <= wppn;
      is_super[widx] <= wsuper;
    end
  end
endmodule
