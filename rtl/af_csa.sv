// af_csa -- 3:2 carry-save adder.
//
// Reduces three W-bit operands to a sum word and a carry word such that
// a + b + c == sum + carry (mod 2^W). It is a row of independent full adders,
// one per bit position, as the ArrayFlex PE uses it; the carry word is the
// full-adder majority output shifted up by one bit, its top bit dropped
// because the column reduction wraps modulo 2^W. Purely combinational.
module af_csa #(
  parameter int unsigned W = 64
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] sum,
  output logic [W-1:0] carry
);

  // bitwise: bit i of sum / maj is the sum / carry output of full adder i
  logic [W-1:0] maj;

  assign sum   = a ^ b ^ c;
  assign maj   = (a & b) | (a & c) | (b & c);
  assign carry = maj << 1;

endmodule
