// uart_tx: 8N1 serial transmitter.
//
// `start` with `data` sends one frame: a start bit, eight data bits LSB
// first and a stop bit, each CLKS_PER_BIT clock cycles long (13 at 104 MHz
// for 8 Mbaud). `busy` is high from the start until the stop bit ends.
module uart_tx #(
  parameter int CLKS_PER_BIT = 13
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       start,
  input  logic [7:0] data,
  output logic       busy,
  output logic       txd
);
  localparam int CW = $clog2(CLKS_PER_BIT + 1);
  logic [CW-1:0] cnt;
  logic [3:0]    bitn;
  logic [9:0]    sh;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt <= '0; bitn <= '0; sh <= '1; busy <= 1'b0; txd <= 1'b1;
    end else if (!busy) begin
      txd <= 1'b1;
      if (start) begin
        sh   <= {1'b1, data, 1'b0};
        busy <= 1'b1;
        bitn <= '0;
        cnt  <= CW'(CLKS_PER_BIT - 1);
        txd  <= 1'b0;
      end
    end else if (cnt != '0) begin
      cnt <= cnt - 1'b1;
    end else begin
      cnt <= CW'(CLKS_PER_BIT - 1);
      if (bitn == 4'd9) begin
        busy <= 1'b0;
        txd  <= 1'b1;
      end else begin
        bitn <= bitn + 1'b1;
        txd  <= sh[bitn + 4'd1];
      end
    end
  end
endmodule
