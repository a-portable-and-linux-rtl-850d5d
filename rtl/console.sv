// console: console register block of RVSoC.
//
// A VirtIO console device (device id 3, two queues: receive and transmit)
// that RVuc serves in software, plus the character path to the serial
// line that RVuc drives:
//   0x080  TX data:  write sends the low byte; read gives 1 while busy
//   0x084  RX data:  read pops the keyboard FIFO, bit 8 = a character was there
//   0x088  RX count: characters waiting
// Keyboard characters go into a RX_DEPTH-entry (16 in the paper) FIFO so
// fast typing is not lost; a character arriving when it is full is dropped.
// `irq` follows the VirtIO interrupt status; `rx_irq` is high while the
// FIFO holds characters. Register accesses answer in one cycle. The FIFO
// size is the paper's; the register layout is this design's.
module console
  import rv_pkg::*;
#(
  parameter int RX_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  mem_req_t    req,
  output mem_rsp_t    rsp,
  input  logic        rx_valid,
  input  logic [7:0]  rx_byte,
  output logic        tx_valid,
  output logic [7:0]  tx_byte,
  input  logic        tx_busy,
  output logic        notify,
  output logic        irq,
  output logic        rx_irq
);
  localparam int AW = $clog2(RX_DEPTH);
  logic [7:0]  fifo [RX_DEPTH];
  logic [AW:0] wp, rp;
  logic        v_ack, v_other, done_q;
  logic [31:0] v_rdata, nq;

  virtio_regs #(.DEVICE_ID(32'd3), .NUM_QUEUES(2)) u_regs (
    .clk, .rst, .req, .ack(v_ack), .rdata(v_rdata), .other(v_other),
    .notify, .notify_queue(nq), .irq
  );

  wire [AW:0] count = wp - rp;
  wire        empty = (count == '0);
  wire        full  = (count == (AW+1)'(RX_DEPTH));
  wire [11:0] off   = req.addr[11:0];
  assign rx_irq = !empty;

  logic [31:0] o_rdata;
  logic        o_ack;

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0; rp <= '0; tx_valid <= 1'b0; tx_byte <= '0; o_ack <= 1'b0; o_rdata <= '0;
      done_q <= 1'b0;
    end else begin
      tx_valid <= 1'b0;
      o_ack    <= 1'b0;
      done_q   <= 1'b0;
      if (rx_valid && !full) begin
        fifo[wp[AW-1:0]] <= rx_byte;
        wp <= wp + 1'b1;
      end
      if (req.valid && v_other && !done_q) begin
        o_ack  <= 1'b1;
        done_q <= 1'b1;
        o_rdata <= 32'd0;
        unique case (off)
          12'h080: begin
            if (req.we) begin tx_valid <= 1'b1; tx_byte <= req.wdata[7:0]; end
            else o_rdata <= {31'b0, tx_busy};
          end
          12'h084: if (!req.we) begin
            if (!empty) begin
              o_rdata <= {23'b0, 1'b1, fifo[rp[AW-1:0]]};
              rp <= rp + 1'b1;
            end
          end
          12'h088: o_rdata <= 32'(count);
          default: ;
        endcase
      end
    end
  end

  assign rsp = v_ack ? '{ready: 1'b1, rdata: v_rdata} : '{ready: o_ack, rdata: o_rdata};

  // unused upper bits of the notified queue index
  logic unused;
  assign unused = ^nq;
endmodule
