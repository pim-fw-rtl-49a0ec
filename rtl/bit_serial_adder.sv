// bit_serial_adder: one full adder and a carry flip-flop, the arithmetic
// cell of the bank PE (BPE) and of its comparator.
//
// Operands arrive least significant bit first, one bit per clock while
// `en` is high. `clear` starts a new word: it loads the carry flip-flop with
// 0 (add) or 1 (subtract); in subtract mode `b` is inverted, so the cell
// computes a - b in two's complement. `sum` and `cout` are combinational
// for the current bit; `carry` is the registered carry, which after the last
// bit of a word is the carry out of the whole word (for a subtraction:
// 1 when a >= b, 0 on a borrow).
//
// The source draws a "32-bit-serial adder" for the sum and a second one for
// the comparison, and names the comparator a "bit-serial subtractor" in its
// parameter table; a one-bit full adder with a carry register is this
// design's reading of both.
module bit_serial_adder #(
  parameter bit SUB = 1'b0          // 0: a + b, 1: a - b
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,               // start a new word (takes priority over en)
  input  logic en,                  // consume one bit pair
  input  logic a,
  input  logic b,
  output logic sum,
  output logic cout,
  output logic carry                // registered carry
);
  logic bx;
  assign bx   = b ^ SUB;
  assign sum  = a ^ bx ^ carry;
  assign cout = (a & bx) | (a & carry) | (bx & carry);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     carry <= SUB;
    else if (clear) carry <= SUB;
    else if (en)    carry <= cout;
  end
endmodule
