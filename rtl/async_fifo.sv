// async_fifo: dual-clock FIFO between the core clock (104 MHz) and the
// DRAM controller clock (81.25 MHz).
//
// Classic Gray-code pointer design: each side keeps a binary and a Gray
// pointer one bit wider than the address, and sees the other side's Gray
// pointer through a two-flop synchroniser. Full and empty are computed
// from the local pointer and the synchronised remote one, so they are
// pessimistic but never wrong. Show-ahead read: rdata is the head entry
// while rempty is low, rinc removes it. DEPTH must be a power of two.
// The paper only says asynchronous FIFOs carry the data between the two
// clocks; depth and structure are this design's.
module async_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 4
) (
  input  logic             wclk,
  input  logic             wrst,
  input  logic             winc,
  input  logic [WIDTH-1:0] wdata,
  output logic             wfull,
  input  logic             rclk,
  input  logic             rrst,
  input  logic             rinc,
  output logic [WIDTH-1:0] rdata,
  output logic             rempty
);
  localparam int AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wq1_rgray, wq2_rgray, rq1_wgray, rq2_wgray;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  wire [AW:0] wbin_n  = wbin + (AW+1)'(winc && !wfull);
  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin <= '0; wgray <= '0; wq1_rgray <= '0; wq2_rgray <= '0;
    end else begin
      wbin  <= wbin_n;
      wgray <= bin2gray(wbin_n);
      {wq2_rgray, wq1_rgray} <= {wq1_rgray, rgray};
    end
  end
  always_ff @(posedge wclk) if (winc && !wfull) mem[wbin[AW-1:0]] <= wdata;
  assign wfull = (wgray == {~wq2_rgray[AW:AW-1], wq2_rgray[AW-2:0]});

  // read side
  wire [AW:0] rbin_n = rbin + (AW+1)'(rinc && !rempty);
  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin <= '0; rgray <= '0; rq1_wgray <= '0; rq2_wgray <= '0;
    end else begin
      rbin  <= rbin_n;
      rgray <= bin2gray(rbin_n);
      {rq2_wgray, rq1_wgray} <= {rq1_wgray, wgray};
    end
  end
  assign rdata  = mem[rbin[AW-1:0]];
  assign rempty = (rgray == rq2_wgray);
endmodule
