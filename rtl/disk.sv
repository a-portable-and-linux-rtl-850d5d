// disk: disk register block of RVSoC.
//
// A VirtIO block device (device id 2, one queue) whose requests RVuc
// serves in software: the kernel writes QueueNotify, which starts RVuc,
// and RVuc moves sectors between the disk area of the DRAM (the upper
// 64 MB) and the buffers named in the queue, then sets the interrupt
// status. The device configuration space at 0x100 gives the capacity in
// 512-byte sectors (64 MB / 512 = 131072, the size of the disk area).
// Accesses answer in one cycle. The register set is the VirtIO one; the
// paper only names the block.
module disk
  import rv_pkg::*;
#(
  parameter logic [31:0] SECTORS = 32'd131072
) (
  input  logic        clk,
  input  logic        rst,
  input  mem_req_t    req,
  output mem_rsp_t    rsp,
  output logic        notify,
  output logic        irq
);
  logic        v_ack, v_other, o_ack, done_q;
  logic [31:0] v_rdata, o_rdata, nq;

  virtio_regs #(.DEVICE_ID(32'd2), .NUM_QUEUES(1)) u_regs (
    .clk, .rst, .req, .ack(v_ack), .rdata(v_rdata), .other(v_other),
    .notify, .notify_queue(nq), .irq
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      o_ack <= 1'b0; o_rdata <= '0; done_q <= 1'b0;
    end else begin
      o_ack  <= 1'b0;
      done_q <= 1'b0;
      if (req.valid && v_other && !done_q) begin
        o_ack  <= 1'b1;
        done_q <= 1'b1;
        unique case (req.addr[11:0])
          12'h100: o_rdata <= SECTORS;     // capacity, low word
          default: o_rdata <= 32'd0;       // capacity high word, others
        endcase
      end
    end
  end

  assign rsp = v_ack ? '{ready: 1'b1, rdata: v_rdata} : '{ready: o_ack, rdata: o_rdata};

  logic unused;
  assign unused = ^nq;
endmodule
