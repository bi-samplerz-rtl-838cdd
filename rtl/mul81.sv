// mul81: fixed point multiplier of the 9.72 format.
//
// The full 162-bit product of two 81-bit operands is formed and its middle
// 81 bits are kept: the 72 low bits are dropped (truncation, the product
// is rescaled from 2^144 to 2^72) and the 9 top bits are dropped because
// every product the sampler forms is below 2^9. Combinational; a datapath
// that needs it for several products per task shares one instance over
// consecutive cycles.
//
// Origin: keeping the middle 81 bits of the 162-bit product is the published
// MUL81; writing it as one combinational multiply is this design's own.
module mul81
  import bisz_pkg::*;
(
  input  fx_t a,
  input  fx_t b,
  output fx_t p
);
  logic [2*FX_W-1:0] full;
  assign full = a * b;
  assign p    = full[FX_F +: FX_W];
endmodule
