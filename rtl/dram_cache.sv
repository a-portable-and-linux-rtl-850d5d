// dram_cache: the DRAM cache, a direct-mapped write-through cache between
// the MMU and the DRAM controller.
//
// CACHE_BYTES (128 KB) of LINE_BYTES (16-byte) lines, indexed and tagged by
// physical (DRAM) address, so process switches never flush it. It serves
// instruction fetches and data of both RVCoreM and RVuc.
//   read  - the arrays are read in the request cycle; the next cycle
//           compares the tag and, on a hit, answers in that same cycle
//           (one-cycle hit latency). A miss sends a 16-byte line read to the DRAM side,
//           fills the line and answers. The answer is the 4 bytes that
//           start at the request's 2-byte aligned offset in the line; at
//           the last halfword only 2 of them belong to the line.
//   write - 1, 2 or 4 bytes (byte enables) are sent to the DRAM side at
//           once; a line that holds the address is invalidated, not
//           updated, and a write never allocates.
// DRAM side: requests (dram_req_t) go into the request FIFO when it is
// not full; line data comes back in order from the response FIFO.
// Organisation and sizes follow the paper; the invalidate-on-store rule is
// its simplification too. Hit and access counters are for statistics.
module dram_cache
  import rv_pkg::*;
#(
  parameter int CACHE_BYTES = 131072,
  parameter int LINE_BYTES  = 16
) (
  input  logic          clk,
  input  logic          rst,
  input  mem_req_t      req,
  output mem_rsp_t      rsp,
  // to the DRAM controller (through the asynchronous FIFOs)
  output logic          dq_push,
  output dram_req_t     dq_data,
  input  logic          dq_full,
  input  logic          dr_empty,
  input  logic [127:0]  dr_data,
  output logic          dr_pop,
  // statistics
  output logic [31:0]   n_access,
  output logic [31:0]   n_hit
);
  localparam int LINES = CACHE_BYTES / LINE_BYTES;
  localparam int IW    = $clog2(LINES);
  localparam int OW    = $clog2(LINE_BYTES);
  localparam int TW    = 27 - IW - OW;

  logic [127:0]  data_a  [LINES];
  logic [TW-1:0] tag_a   [LINES];
  logic [LINES-1:0] valid;

  typedef enum logic [1:0] { C_IDLE, C_LOOK, C_FILL, C_DONE } c_t;
  c_t st;

  logic [127:0]  q_data;
  logic [TW-1:0] q_tag;
  logic          q_valid;
  mem_req_t      r;      // the request being served
  mem_rsp_t      rsp_q;  // answer of a write or a fill

  wire [IW-1:0] idx  = req.addr[OW+IW-1:OW];
  wire [IW-1:0] ridx = r.addr[OW+IW-1:OW];
  wire [TW-1:0] rtag = r.addr[26:OW+IW];
  wire          hit  = q_valid && (q_tag == rtag);

  function automatic logic [31:0] pick(input logic [127:0] line, input logic [OW-1:0] off);
    logic [127:0] s;
    s = line >> (8 * {off[OW-1:1], 1'b0});
    return s[31:0];
  endfunction

  always_ff @(posedge clk) begin
    q_data  <= data_a[idx];
    q_tag   <= tag_a[idx];
    q_valid <= valid[idx];
  end

  // a read hit answers in the compare cycle: one cycle after the request
  wire hit_now = (st == C_LOOK) && !r.we && hit;
  assign rsp = hit_now ? '{ready: 1'b1, rdata: pick(q_data, r.addr[OW-1:0])} : rsp_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= C_IDLE; rsp_q <= '0; r <= '0; valid <= '0;
      dq_push <= 1'b0; dq_data <= '0; dr_pop <= 1'b0; n_access <= '0; n_hit <= '0;
    end else begin
      rsp_q.ready <= 1'b0;
      dq_push   <= 1'b0;
      dr_pop    <= 1'b0;
      unique case (st)
        C_IDLE: if (req.valid) begin
          r  <= req;
          st <= C_LOOK;
        end
        C_LOOK: begin
          if (r.we) begin
            if (!dq_full) begin
              if (hit) valid[ridx] <= 1'b0;
              dq_push <= 1'b1;
              dq_data <= '{we: 1'b1, addr: {r.addr[26:2], 2'b00},
                           mask: 16'(r.be) << {r.addr[OW-1:2], 2'b00},
                           wdata: {4{r.wdata}}};
              rsp_q.ready <= 1'b1;
              st <= C_DONE;
            end
          end else begin
            n_access <= n_access + 1'b1;
            if (hit) begin
              n_hit <= n_hit + 1'b1;
              st <= C_DONE;
            end else if (!dq_full) begin
              dq_push <= 1'b1;
              dq_data <= '{we: 1'b0, addr: {r.addr[26:OW], {OW{1'b0}}}, mask: '1, wdata: '0};
              st <= C_FILL;
            end
          end
        end
        C_FILL: if (!dr_empty && !dr_pop) begin
          dr_pop <= 1'b1;
          data_a[ridx] <= dr_data;
          tag_a[ridx]  <= rtag;
          valid[ridx]  <= 1'b1;
          rsp_q <= '{ready: 1'b1, rdata: pick(dr_data, r.addr[OW-1:0])};
          st <= C_DONE;
        end
        default: st <= C_IDLE;   // C_DONE: the requester drops its request
      endcase
    end
  end
endmodule
