// regfile: the 32 x 32-bit integer register file (reg_file).
//
// Two asynchronous read ports, as the paper's green units are
// "combinational circuits with asynchronous memories", and one write
// port written at the rising clock edge (the WB step). x0 reads zero and
// ignores writes. All registers clear on reset, a choice of this design.
module regfile (
  input  logic        clk,
  input  logic        rst,
  input  logic [4:0]  ra1,
  input  logic [4:0]  ra2,
  output logic [31:0] rd1,
  output logic [31:0] rd2,
  input  logic        we,
  input  logic [4:0]  wa,
  input  logic [31:0] wd
);
  logic [31:0] x [32];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 32; i++) x[i] <= '0;
    end else if (we && wa != 5'd0) begin
      x[wa] <= wd;
    end
  end

  assign rd1 = (ra1 == 5'd0) ? 32'd0 : x[ra1];
  assign rd2 = (ra2 == 5'd0) ? 32'd0 : x[ra2];
endmodule
