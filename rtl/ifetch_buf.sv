// ifetch_buf: instruction fetch unit of RVCoreM with the 16-bit Buffer.
//
// The fetch always asks the cache for 4 bytes at the PC. With compressed
// instructions the PC is only 2-byte aligned, so at the last halfword of a
// cache line (offset LINE_BYTES-2) a 32-bit instruction straddles two
// lines. The 16-bit Buffer keeps the upper halfword of the previous 4-byte
// fetch together with its address. When the PC points at that halfword
// and it is the last one of its line, the unit fetches the next line's
// first word and builds the instruction as {new low halfword, buffered
// halfword}: one cache access instead of two. When the buffer does not
// hold it, the first access brings the low halfword; if that is a
// compressed instruction the fetch is complete, otherwise a second access
// to PC+2 supplies the upper half (the IF step loops on itself).
//
// Interface: `start` with `pc` begins a fetch; the unit drives one memory
// request at a time (held until `mem_ready`), and pulses `done` with `ir`
// (or `fault` and `fault_addr` on a page fault). `flush` empties the buffer
// (stores, CSR writes, traps and fences can make it stale).
// The buffer scheme follows the paper (Fig. 5); the flush rule is this
// design's choice.
module ifetch_buf #(
  parameter int LINE_BYTES = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        flush,
  input  logic        start,
  input  logic [31:0] pc,
  // memory port
  output logic        mem_valid,
  output logic [31:0] mem_addr,
  input  logic        mem_ready,
  input  logic        mem_fault,
  input  logic [31:0] mem_data,
  // result
  output logic        done,
  output logic        fault,
  output logic [31:0] fault_addr,
  output logic [31:0] ir,
  // statistics
  output logic        ev_buf_hit,     // crosses-line fetch served from buffer
  output logic        ev_two_access   // crosses-line fetch that needed two accesses
);
  localparam int OW = $clog2(LINE_BYTES);

  typedef enum logic [1:0] { F_IDLE, F_ONE, F_FIRST, F_SECOND } f_t;
  f_t st;
  logic        buf_valid;
  logic [31:0] buf_addr;
  logic [15:0] buf_half, low_half;
  logic [31:0] fpc;

  wire crosses   = (pc[OW-1:1] == {(OW-1){1'b1}});
  wire buf_hit = buf_valid && (buf_addr == pc);

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= F_IDLE; mem_valid <= 1'b0; mem_addr <= '0; done <= 1'b0; fault <= 1'b0;
      fault_addr <= '0; ir <= '0; buf_valid <= 1'b0; buf_addr <= '0; buf_half <= '0;
      low_half <= '0; fpc <= '0; ev_buf_hit <= 1'b0; ev_two_access <= 1'b0;
    end else begin
      done <= 1'b0;
      ev_buf_hit <= 1'b0;
      ev_two_access <= 1'b0;
      if (flush) buf_valid <= 1'b0;
      unique case (st)
        F_IDLE: if (start) begin
          fpc   <= pc;
          fault <= 1'b0;
          mem_valid <= 1'b1;
          if (crosses && buf_hit && !flush) begin
            mem_addr   <= pc + 32'd2;      // next line, position C of Fig. 5
            low_half   <= buf_half;
            ev_buf_hit <= 1'b1;
            st <= F_SECOND;
          end else if (crosses) begin
            mem_addr <= pc;
            st <= F_FIRST;
          end else begin
            mem_addr <= pc;
            st <= F_ONE;
          end
        end
        F_ONE: if (mem_ready) begin
          mem_valid <= 1'b0;
          done <= 1'b1;
          if (mem_fault) begin
            fault <= 1'b1; fault_addr <= mem_addr;
          end else begin
            ir <= mem_data;
            buf_valid <= 1'b1;
            buf_addr  <= mem_addr + 32'd2;
            buf_half  <= mem_data[31:16];
          end
          st <= F_IDLE;
        end
        F_FIRST: if (mem_ready) begin
          if (mem_fault) begin
            mem_valid <= 1'b0; done <= 1'b1; fault <= 1'b1; fault_addr <= mem_addr;
            st <= F_IDLE;
          end else if (mem_data[1:0] != 2'b11) begin
            mem_valid <= 1'b0; done <= 1'b1;
            ir <= {16'h0, mem_data[15:0]};
            buf_valid <= 1'b0;
            st <= F_IDLE;
          end else begin
            low_half <= mem_data[15:0];
            mem_addr <= fpc + 32'd2;
            ev_two_access <= 1'b1;
            st <= F_SECOND;
          end
        end
        F_SECOND: if (mem_ready) begin
          mem_valid <= 1'b0;
          done <= 1'b1;
          if (mem_fault) begin
            fault <= 1'b1; fault_addr <= mem_addr;
          end else begin
            ir <= {mem_data[15:0], low_half};
            buf_valid <= 1'b1;
            buf_addr  <= mem_addr + 32'd2;
            buf_half  <= mem_data[31:16];
          end
          st <= F_IDLE;
        end
        default: st <= F_IDLE;
      endcase
    end
  end
endmodule
