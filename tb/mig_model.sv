// mig_model: behavioural model of the user (app_*) interface of the DRAM
// memory controller IP, for simulation only. Not synthesizable as a DRAM:
// it is an array of 128-bit lines (LINES of them, the DRAM address wraps)
// that accepts commands when app_rdy is high (randomly low now and then),
// takes write data on app_wdf_wren with byte masks (1 = keep), and returns
// read data RD_LAT cycles after a read command with app_rd_data_valid/end.
module mig_model #(
  parameter int LINES  = 65536,
  parameter int RD_LAT = 6
) (
  input  logic          clk,
  input  logic [26:0]   app_addr,
  input  logic [2:0]    app_cmd,
  input  logic          app_en,
  output logic          app_rdy,
  input  logic [127:0]  app_wdf_data,
  input  logic [15:0]   app_wdf_mask,
  input  logic          app_wdf_wren,
  input  logic          app_wdf_end,
  output logic          app_wdf_rdy,
  output logic [127:0]  app_rd_data,
  output logic          app_rd_data_valid,
  output logic          app_rd_data_end
);
  logic [127:0] mem [LINES];
  logic [127:0] wbuf;
  logic [15:0]  wmask;
  int           n_reads = 0, n_writes = 0;
  localparam int LW = $clog2(LINES);

  initial begin
    app_rdy = 1; app_wdf_rdy = 1; app_rd_data_valid = 0; app_rd_data_end = 0; app_rd_data = '0;
    wbuf = '0; wmask = '1;
  end

  always @(posedge clk) begin
    app_rdy <= ($urandom() % 4) != 0;
    app_rd_data_valid <= 0;
    app_rd_data_end   <= 0;
    if (app_wdf_wren && app_wdf_rdy) begin
      wbuf  <= app_wdf_data;
      wmask <= app_wdf_mask;
    end
    if (app_en && app_rdy) begin
      if (app_cmd == 3'b001) begin
        n_reads++;
        fork
          begin
            automatic logic [LW-1:0] a = app_addr[LW+2:3];
            repeat (RD_LAT) @(posedge clk);
            app_rd_data       <= mem[a];
            app_rd_data_valid <= 1;
            app_rd_data_end   <= 1;
          end
        join_none
      end else begin
        n_writes++;
        for (int b = 0; b < 16; b++)
          if (!wmask[b]) mem[app_addr[LW+2:3]][8*b +: 8] = wbuf[8*b +: 8];
      end
    end
  end
endmodule
