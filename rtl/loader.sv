// loader: serial front end of RVSoC.
//
// Before the system runs, the host sends the initialisation image over the
// serial line (8N1, BAUD at CLK_HZ: 8 Mbaud at 104 MHz). The image is a
// sequence of packets, each a command byte, a 4-byte address and a 4-byte
// byte count (little endian), followed by the data for the two write
// commands:
//   0x01  write the data to physical memory (boot loader, kernel, disk image)
//   0x02  write the data to RVuc's local memory (its I/O program)
//   0x03  start: release RVCoreM from reset (no address/count/data follow
//         ... the 8 header bytes are still sent and ignored)
// Data is gathered into little-endian 32-bit words, each written with a
// held request until `ready`. RVCoreM stays in reset (core_hold) until the
// start command. From then on every received byte goes to the console
// keyboard FIFO, and bytes from the console are sent back to the host.
// The packet format is this design's; the paper says only that this block
// receives the initialisation file and carries the terminal.
module loader
  import rv_pkg::*;
#(
  parameter int CLK_HZ = 104_000_000,
  parameter int BAUD   = 8_000_000
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        rxd,
  output logic        txd,
  // memory writes
  output mem_req_t    mreq,
  input  mem_rsp_t    mrsp,
  // RVuc program port
  output logic        uc_we,
  output logic [31:0] uc_addr,
  output logic [31:0] uc_data,
  // control
  output logic        core_hold,
  // console character path
  output logic        con_rx_valid,
  output logic [7:0]  con_rx_byte,
  input  logic        con_tx_valid,
  input  logic [7:0]  con_tx_byte,
  output logic        con_tx_busy
);
  localparam int CPB = (CLK_HZ + BAUD / 2) / BAUD;

  logic       rx_v;
  logic [7:0] rx_d;
  uart_rx #(.CLKS_PER_BIT(CPB)) u_rx (.clk, .rst, .rxd, .valid(rx_v), .data(rx_d));
  uart_tx #(.CLKS_PER_BIT(CPB)) u_tx (.clk, .rst, .start(con_tx_valid), .data(con_tx_byte),
                                      .busy(con_tx_busy), .txd);

  typedef enum logic [2:0] { L_CMD, L_HDR, L_DATA, L_WRITE, L_RUN } l_t;
  l_t st;
  logic [7:0]  cmd;
  logic [63:0] hdr;
  logic [3:0]  hcnt;
  logic [31:0] addr, remain, word;
  logic [1:0]  bcnt;

  assign con_rx_valid = (st == L_RUN) && rx_v;
  assign con_rx_byte  = rx_d;

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= L_CMD; cmd <= '0; hdr <= '0; hcnt <= '0; addr <= '0; remain <= '0; word <= '0;
      bcnt <= '0; mreq <= '0; uc_we <= 1'b0; uc_addr <= '0; uc_data <= '0; core_hold <= 1'b1;
    end else begin
      uc_we <= 1'b0;
      unique case (st)
        L_CMD: if (rx_v) begin
          cmd <= rx_d; hcnt <= '0; st <= L_HDR;
        end
        L_HDR: if (rx_v) begin
          hdr  <= {rx_d, hdr[63:8]};
          hcnt <= hcnt + 1'b1;
          if (hcnt == 4'd7) begin
            addr   <= hdr[39:8];
            remain <= {rx_d, hdr[63:40]};
            bcnt   <= '0;
            if (cmd == 8'h03) begin
              core_hold <= 1'b0;
              st <= L_RUN;
            end else if ({rx_d, hdr[63:40]} == 32'd0) begin
              st <= L_CMD;
            end else begin
              st <= L_DATA;
            end
          end
        end
        L_DATA: if (rx_v) begin
          word   <= {rx_d, word[31:8]};
          bcnt   <= bcnt + 1'b1;
          remain <= remain - 1'b1;
          if (bcnt == 2'd3 || remain == 32'd1) begin
            if (cmd == 8'h02) begin
              uc_we <= 1'b1; uc_addr <= addr; uc_data <= {rx_d, word[31:8]} >> (8 * (3 - int'(bcnt)));
              addr <= addr + 32'd4;
              bcnt <= '0;
              st <= (remain == 32'd1) ? L_CMD : L_DATA;
            end else begin
              mreq <= '{valid: 1'b1, we: 1'b1, addr: addr, be: 4'hF,
                        wdata: {rx_d, word[31:8]} >> (8 * (3 - int'(bcnt)))};
              st <= L_WRITE;
            end
          end
        end
        L_WRITE: if (mrsp.ready) begin
          mreq.valid <= 1'b0;
          addr <= addr + 32'd4;
          bcnt <= '0;
          st <= (remain == 32'd0) ? L_CMD : L_DATA;
        end
        default: ;   // L_RUN: console pass-through
      endcase
    end
  end
endmodule
