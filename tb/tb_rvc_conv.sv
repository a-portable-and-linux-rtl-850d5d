// tb_rvc_conv: checks the compressed-instruction converter against
// expansions produced by a reference RISC-V assembler (each compressed
// instruction assembled next to its 32-bit equivalent), plus pass-through
// of 32-bit instructions and rejection of reserved encodings.
`include "tb_check.svh"
module tb_rvc_conv;
  int checks = 0, failures = 0;
  logic [31:0] in, out;
  logic is_c, ill;
  rvc_conv dut (.ir_in(in), .ir_out(out), .is_c, .illegal(ill));

  logic [15:0] cin  [27] = '{16'h0800,16'h41c8,16'hc690,16'h0001,16'h1575,16'h2081,16'h47c5,16'h7139,
                             16'h677d,16'h808d,16'h84fd,16'h9a65,16'h8d0d,16'h8e35,16'h8f5d,16'h8c65,
                             16'hb7c5,16'hc901,16'hfde5,16'h0296,16'h40b2,16'h8302,16'h83aa,16'h9002,
                             16'h9602,16'h994e,16'hde3a};
  logic [31:0] cexp [27] = '{32'h01010413,32'h0045a503,32'h00c6a423,32'h00000013,32'hffd50513,32'h040000ef,
                             32'h01100793,32'hfc010113,32'h0001f737,32'h0034d493,32'h41f4d493,32'hff967613,
                             32'h40b50533,32'h00d64633,32'h00f76733,32'h00947433,32'hfe1ff06f,32'h00050863,
                             32'hfe059ce3,32'h00529293,32'h00c12083,32'h00030067,32'h00a003b3,32'h00100073,
                             32'h000600e7,32'h01390933,32'h02e12e23};
  initial begin
    for (int i = 0; i < 27; i++) begin
      in = {$urandom() & 32'hFFFF, 16'h0} | {16'h0, cin[i]};
      #1;
      `CHECK_EQ(out, cexp[i], $sformatf("expand %h", cin[i]))
      `CHECK(is_c && !ill, "compressed flag")
    end
    for (int i = 0; i < 20; i++) begin
      in = $urandom() | 32'h3;
      #1;
      `CHECK_EQ(out, in, "32-bit pass-through")
      `CHECK(!is_c, "not compressed")
    end
    in = 32'h0000_0000; #1;  // all-zero halfword is illegal
    `CHECK(ill, "zero is illegal")
    in = 32'h0000_6101; #1;  // c.addi16sp with zero immediate is reserved
    `CHECK(ill, "addi16sp 0 reserved")
    `TB_DONE
  end
  initial begin #100000; failures++; `TB_DONE end
endmodule
