// uart_rx: 8N1 serial receiver.
//
// Waits for a start bit, samples each bit in the middle of its period
// (CLKS_PER_BIT clock cycles long) and presents the byte with a one-cycle
// `valid` after the stop bit's middle. The input is synchronised with two
// flops first. At 104 MHz, 13 clocks per bit gives the paper's 8 Mbaud.
module uart_rx #(
  parameter int CLKS_PER_BIT = 13
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rxd,
  output logic       valid,
  output logic [7:0] data
);
  localparam int CW = $clog2(CLKS_PER_BIT * 2);
  logic [1:0]  sync;
  logic [CW-1:0] cnt;
  logic [3:0]  bitn;
  logic        busy;
  logic [7:0]  sh;

  always_ff @(posedge clk) begin
    if (rst) begin
      sync <= 2'b11; cnt <= '0; bitn <= '0; busy <= 1'b0; sh <= '0; valid <= 1'b0; data <= '0;
    end else begin
      sync  <= {sync[0], rxd};
      valid <= 1'b0;
      if (!busy) begin
        if (!sync[1]) begin
          busy <= 1'b1;
          cnt  <= CW'(CLKS_PER_BIT / 2);
          bitn <= '0;
        end
      end else if (cnt != '0) begin
        cnt <= cnt - 1'b1;
      end else begin
        cnt <= CW'(CLKS_PER_BIT - 1);
        bitn <= bitn + 1'b1;
        if (bitn == 4'd0) begin
          if (sync[1]) busy <= 1'b0;          // false start
        end else if (bitn <= 4'd8) begin
          sh <= {sync[1], sh[7:1]};
        end else begin
          busy <= 1'b0;
          if (sync[1]) begin valid <= 1'b1; data <= sh; end
        end
      end
    end
  end
endmodule
