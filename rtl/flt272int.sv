// flt272int: IEEE-754 double to the sampler's fixed point format.
//
// Falcon hands the sampler its center mu and its inverse standard deviation
// as doubles; everything after this converter works on integers scaled by
// 2^72. A normal double (-1)^s * m * 2^(e-1075), m the 53-bit significand
// with its hidden one, becomes m shifted left by e-1003 (right when that is
// negative; bits below 2^-72 are dropped, which loses nothing for values
// of magnitude 2^-20 or more). Zero and subnormal inputs give zero.
//
// Outputs: `fx` is the 81-bit unsigned 9.72 value of |d| (used for the
// positive sigma input); `flr` is floor(d) as a signed FLOOR_W-bit integer
// and `frac` = d - floor(d) in 0.72 format (used for the centers, which may
// be negative: the negative value is formed in two's complement, whose
// upper bits are the floor and lower 72 bits the fraction in [0,1)). The
// converter is combinational; |d| must be below 2^(FLOOR_W-1).
//
// Origin: the 81-bit format with 72 fraction bits (value * 2^72, 9 integer
// bits) is the published one. The signed floor/fraction split used for the
// centers, and the handling of zero and subnormals, are this design's own.
module flt272int
  import bisz_pkg::*;
(
  input  dbl_t          d,
  output fx_t           fx,
  output floor_t        flr,
  output logic [71:0]   frac
);
  localparam int W = FX_F + FLOOR_W;   // magnitude width

  logic            s;
  logic [10:0]     e;
  logic [52:0]     m;
  logic [W-1:0]    mag;
  logic [W:0]      sgn;
  int              sh;

  always_comb begin
    s  = d[63];
    e  = d[62:52];
    m  = {1'b1, d[51:0]};
    sh = int'(e) - 1003;
    if (e == 11'd0)      mag = '0;
    else if (sh >= 0)    mag = W'(m) << sh;
    else if (sh > -64)   mag = W'(m >> (-sh));
    else                 mag = '0;
    sgn  = s ? -{1'b0, mag} : {1'b0, mag};
    fx   = mag[FX_W-1:0];
    flr  = floor_t'(sgn[W:FX_F]);
    frac = sgn[FX_F-1:0];
  end
endmodule
