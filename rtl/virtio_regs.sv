// virtio_regs: VirtIO-MMIO (legacy, version 1) register set shared by the
// console and disk register blocks.
//
// Identification registers (magic "virt", version, device id, vendor),
// per-queue QueueNum and QueuePFN selected by QueueSel, GuestPageSize,
// Status, and the QueueNotify doorbell, which raises `notify` for one
// cycle: this is the I/O request that starts RVuc. InterruptStatus is set
// by writes to 0x060 (RVuc reports completion) and cleared by InterruptACK
// (0x064, written by the kernel); `irq` is high while any bit is set.
// Offsets follow the VirtIO-MMIO specification. Accesses answer in one
// cycle; an offset this block does not know is returned through `other`
// so the device module can add its own registers.
module virtio_regs
  import rv_pkg::*;
#(
  parameter logic [31:0] DEVICE_ID  = 32'd2,
  parameter int          NUM_QUEUES = 1,
  parameter logic [31:0] QUEUE_MAX  = 32'd8
) (
  input  logic        clk,
  input  logic        rst,
  input  mem_req_t    req,
  output logic        ack,        // request handled here (one cycle)
  output logic [31:0] rdata,
  output logic        other,      // offset not handled here
  output logic        notify,
  output logic [31:0] notify_queue,
  output logic        irq
);
  localparam int QW = (NUM_QUEUES > 1) ? $clog2(NUM_QUEUES) : 1;
  logic [31:0] qsel, status, isr, page_size;
  logic [31:0] qnum [NUM_QUEUES];
  logic [31:0] qpfn [NUM_QUEUES];
  logic        done_q;

  wire [11:0]   off = req.addr[11:0];
  wire [QW-1:0] q   = qsel[QW-1:0];
  wire          qok = (qsel < NUM_QUEUES);

  always_comb begin
    other = 1'b0;
    unique case (off)
      12'h000: rdata = 32'h7472_6976;
      12'h004: rdata = 32'd1;
      12'h008: rdata = DEVICE_ID;
      12'h00C: rdata = 32'h554D_4551;
      12'h010: rdata = 32'd0;          // host features
      12'h028: rdata = page_size;
      12'h030: rdata = qsel;
      12'h034: rdata = qok ? QUEUE_MAX : 32'd0;
      12'h038: rdata = qok ? qnum[q] : 32'd0;
      12'h040: rdata = qok ? qpfn[q] : 32'd0;
      12'h060: rdata = isr;
      12'h070: rdata = status;
      12'h014, 12'h020, 12'h024, 12'h03C, 12'h050, 12'h064: rdata = 32'd0;
      default: begin rdata = 32'd0; other = 1'b1; end
    endcase
  end

  assign irq = (isr != 32'd0);

  always_ff @(posedge clk) begin
    if (rst) begin
      qsel <= '0; status <= '0; isr <= '0; page_size <= '0; ack <= 1'b0;
      notify <= 1'b0; notify_queue <= '0; done_q <= 1'b0;
      for (int i = 0; i < NUM_QUEUES; i++) begin qnum[i] <= '0; qpfn[i] <= '0; end
    end else begin
      notify <= 1'b0;
      ack    <= 1'b0;
      done_q <= 1'b0;
      if (req.valid && !other && !done_q) begin
        ack    <= 1'b1;
        done_q <= 1'b1;
        if (req.we) begin
          unique case (off)
            12'h028: page_size <= req.wdata;
            12'h030: qsel <= req.wdata;
            12'h038: if (qok) qnum[q] <= req.wdata;
            12'h040: if (qok) qpfn[q] <= req.wdata;
            12'h050: begin notify <= 1'b1; notify_queue <= req.wdata; end
            12'h060: isr <= isr | req.wdata;
            12'h064: isr <= isr & ~req.wdata;
            12'h070: begin
              status <= req.wdata;
              if (req.wdata == 32'd0) begin   // device reset
                isr <= '0; qsel <= '0;
                for (int i = 0; i < NUM_QUEUES; i++) begin qnum[i] <= '0; qpfn[i] <= '0; end
              end
            end
            default: ;
          endcase
        end
      end
    end
  end
endmodule
