// dram_ctrl: DRAM controller front end on the 81.25 MHz memory clock.
//
// Takes cache requests from the request FIFO and drives the user
// interface of the memory controller IP (Xilinx MIG, app_* signals, 128-bit
// data for a x16 DDR2 at 4:1). A read asks for one 16-byte line
// (app_cmd 001) and pushes the returned line into the response FIFO. A
// write first hands over the data (app_wdf_wren/end, mask bit 1 = byte not
// written) and then the command (app_cmd 000). One request at a time.
// app_addr is the column address in 2-byte units: byte address >> 1 with
// the line offset cleared. The 16-byte reads and 1/2/4-byte writes are the
// paper's; the handshake is the MIG user interface's.
module dram_ctrl
  import rv_pkg::*;
(
  input  logic          clk,
  input  logic          rst,
  // request FIFO (show-ahead)
  input  logic          rq_empty,
  input  dram_req_t     rq_data,
  output logic          rq_pop,
  // response FIFO
  output logic          rs_push,
  output logic [127:0]  rs_data,
  input  logic          rs_full,
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
  input  logic          app_rd_data_end
);
  typedef enum logic [2:0] { D_IDLE, D_WDATA, D_CMD, D_RDATA, D_RESP } d_t;
  d_t st;
  dram_req_t r;

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= D_IDLE; r <= '0; rq_pop <= 1'b0; rs_push <= 1'b0; rs_data <= '0;
      app_addr <= '0; app_cmd <= 3'b000; app_en <= 1'b0;
      app_wdf_data <= '0; app_wdf_mask <= '1; app_wdf_wren <= 1'b0; app_wdf_end <= 1'b0;
    end else begin
      rq_pop  <= 1'b0;
      rs_push <= 1'b0;
      unique case (st)
        D_IDLE: if (!rq_empty && !rq_pop) begin
          r <= rq_data;
          rq_pop <= 1'b1;
          app_addr <= {1'b0, rq_data.addr[26:4], 3'b000};
          if (rq_data.we) begin
            app_wdf_data <= rq_data.wdata;
            app_wdf_mask <= ~rq_data.mask;
            app_wdf_wren <= 1'b1;
            app_wdf_end  <= 1'b1;
            st <= D_WDATA;
          end else begin
            app_cmd <= 3'b001;
            app_en  <= 1'b1;
            st <= D_CMD;
          end
        end
        D_WDATA: if (app_wdf_rdy) begin
          app_wdf_wren <= 1'b0;
          app_wdf_end  <= 1'b0;
          app_cmd <= 3'b000;
          app_en  <= 1'b1;
          st <= D_CMD;
        end
        D_CMD: if (app_rdy) begin
          app_en <= 1'b0;
          st <= r.we ? D_IDLE : D_RDATA;
        end
        D_RDATA: if (app_rd_data_valid && app_rd_data_end) begin
          rs_data <= app_rd_data;
          st <= D_RESP;
        end
        D_RESP: if (!rs_full) begin
          rs_push <= 1'b1;
          st <= D_IDLE;
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
