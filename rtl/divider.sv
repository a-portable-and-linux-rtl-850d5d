// divider: multi-cycle divider for DIV, DIVU, REM and REMU.
//
// A single-cycle divider would be the critical path of the whole system,
// so the quotient is produced one bit per cycle by restoring division on
// the operand magnitudes: 32 iterations, then one cycle that applies the
// signs. `done` pulses 34 cycles after `start` (about 32, as the paper
// states). Division by zero and signed overflow give the ISA's defined
// results (quotient all ones / dividend; remainder dividend / zero).
// Interface: start is a one-cycle pulse while idle; y holds after done.
module divider #(
  parameter int XLEN = 32
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            start,
  input  logic [2:0]      funct3,   // 100 DIV, 101 DIVU, 110 REM, 111 REMU
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] b,
  output logic            busy,
  output logic            done,
  output logic [XLEN-1:0] y
);
  logic [XLEN-1:0] quo, rem_q, dvs;
  logic [$clog2(XLEN+1)-1:0] cnt;
  logic neg_q, neg_r, want_rem, running, fix;
  logic [XLEN:0] trial;

  wire sgn = ~funct3[0];
  wire [XLEN-1:0] a_mag = (sgn && a[XLEN-1]) ? -a : a;
  wire [XLEN-1:0] b_mag = (sgn && b[XLEN-1]) ? -b : b;

  assign trial = {rem_q, quo[XLEN-1]} - {1'b0, dvs};
  assign busy  = running | fix;

  always_ff @(posedge clk) begin
    if (rst) begin
      running <= 1'b0; fix <= 1'b0; done <= 1'b0; cnt <= '0;
      quo <= '0; rem_q <= '0; dvs <= '0; y <= '0;
      neg_q <= 1'b0; neg_r <= 1'b0; want_rem <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        running  <= 1'b1;
        cnt      <= '0;
        quo      <= a_mag;
        rem_q    <= '0;
        dvs      <= b_mag;
        want_rem <= funct3[1];
        neg_q    <= sgn && (a[XLEN-1] ^ b[XLEN-1]) && (b != '0);
        neg_r    <= sgn && a[XLEN-1];
      end else if (running) begin
        // shift one dividend bit into the partial remainder
        if (!trial[XLEN]) begin
          rem_q <= trial[XLEN-1:0];
          quo   <= {quo[XLEN-2:0], 1'b1};
        end else begin
          rem_q <= {rem_q[XLEN-2:0], quo[XLEN-1]};
          quo   <= {quo[XLEN-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == ($clog2(XLEN+1))'(XLEN - 1)) begin
          running <= 1'b0;
          fix     <= 1'b1;
        end
      end else if (fix) begin
        fix  <= 1'b0;
        done <= 1'b1;
        if (want_rem) y <= neg_r ? -rem_q : rem_q;
        else          y <= neg_q ? -quo   : quo;
      end
    end
  end
endmodule
