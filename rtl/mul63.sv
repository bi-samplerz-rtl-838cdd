// mul63: unsigned 64x64 multiplier returning (a*b) >> 63, truncated to 64
// bits. This is the product of ApproxExp, whose operands are 63-bit
// fractions (values scaled by 2^63) and whose results stay below 2^64.
// Combinational.
//
// Origin: the 63-bit fixed-point product of Falcon's ApproxExp; the
// published For_loop names it MUL63. Combinational, as a plain multiply.
module mul63 (
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic [63:0] p
);
  logic [127:0] full;
  assign full = a * b;
  assign p    = full[126:63];
endmodule
