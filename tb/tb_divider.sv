// tb_divider: DIV/DIVU/REM/REMU on random and corner operands (divide by
// zero, most negative / -1); also checks that each result takes 34 cycles.
`include "tb_check.svh"
module tb_divider;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, start = 0, busy, done;
  logic [2:0] f3; logic [31:0] a, b, y, e;
  int cyc;
  divider #(.XLEN(32)) dut (.clk, .rst, .start, .funct3(f3), .a, .b, .busy, .done, .y);
  always #5 clk = ~clk;
  function automatic logic [31:0] ref_div(logic [2:0] f, logic [31:0] x, logic [31:0] d);
    longint sx = longint'($signed(x)), sd = longint'($signed(d));
    longint ux = longint'({32'b0, x}), ud = longint'({32'b0, d});
    case (f)
      3'b100: return (d == 0) ? 32'hFFFF_FFFF : ((x == 32'h8000_0000 && d == '1) ? x : 32'(sx / sd));
      3'b101: return (d == 0) ? 32'hFFFF_FFFF : 32'(ux / ud);
      3'b110: return (d == 0) ? x : ((x == 32'h8000_0000 && d == '1) ? 0 : 32'(sx % sd));
      default: return (d == 0) ? x : 32'(ux % ud);
    endcase
  endfunction
  initial begin
    f3 = 0; a = 0; b = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 400; i++) begin
      f3 = 3'(4 + i % 4);
      a = (i % 13 == 0) ? 32'h8000_0000 : $urandom();
      b = (i % 17 == 0) ? 32'd0 : ((i % 13 == 0) ? 32'hFFFF_FFFF : ((i % 2) ? $urandom() % 1000 : $urandom()));
      start = 1; @(posedge clk); #1 start = 0; cyc = 1;
      while (!done) begin @(posedge clk); #1 cyc++; end
      e = ref_div(f3, a, b);
      `CHECK_EQ(y, e, $sformatf("f3=%0d a=%h b=%h", f3, a, b))
      `CHECK_EQ(cyc, 34, "latency")
    end
    `TB_DONE
  end
  initial begin #10000000; failures++; `TB_DONE end
endmodule
