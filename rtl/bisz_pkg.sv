// bisz_pkg: shared types and constants of the dual-path SamplerZ.
//
// All real-valued quantities inside the sampler are unsigned fixed point
// numbers scaled by 2^72 and held in 81 bits (9 integer bits, 72 fraction
// bits), the format the architecture uses throughout. The constant tables
// are the ones of the Falcon specification: the reverse cumulative
// distribution table (RCDT) of the half-Gaussian base distribution with
// sigma_max = 1.8205 (18 entries of 72 bits) and the 13 coefficients of the
// polynomial approximation of 2^63*exp(-x) used by ApproxExp. The fixed
// point forms of ln(2), 1/ln(2), 1/(2*sigma_max^2) and sigma_min are
// floor(value * 2^72).
package bisz_pkg;

  localparam int FX_W   = 81;   // fixed point width
  localparam int FX_F   = 72;   // fraction bits
  localparam int FX_I   = 9;    // integer bits
  localparam int RCDT_N = 18;   // RCDT entries
  localparam int Z0_W   = 5;    // base sample width, z0 in 0..18
  localparam int FLOOR_W = 32;  // width of floor(mu), an own choice

  typedef logic [FX_W-1:0] fx_t;
  typedef logic [63:0]     dbl_t;     // IEEE-754 binary64 bit pattern
  typedef logic signed [FLOOR_W-1:0] floor_t;

  // Reverse cumulative distribution table, entry i = floor(2^72 * P(z0 > i)).
  localparam logic [71:0] RCDT [RCDT_N] = '{
    72'hA3F7F42ED3AC391802, 72'h54D32B181F3F7DDB82, 72'h227DCDD0934829C1FF,
    72'h0AD1754377C7994AE4, 72'h0295846CAEF33F1F6F, 72'h00774AC754ED74BD5F,
    72'h001024DD542B776AE4, 72'h0001A1FFDC65AD63DA, 72'h00001F80D88A7B6428,
    72'h000001C3FDB2040C69, 72'h00000012CF24D031FB, 72'h00000000949F8B091F,
    72'h0000000003665DA998, 72'h00000000000EBF6EBB, 72'h0000000000002F5D7E,
    72'h000000000000007098, 72'h0000000000000000C6, 72'h000000000000000001
  };

  // ApproxExp coefficients: C[0] starts the Horner recursion, C[1..12]
  // are subtracted in the 12 loop steps.
  localparam logic [63:0] EXP_C [13] = '{
    64'h00000004741183A3, 64'h00000036548CFC06, 64'h0000024FDCBF140A,
    64'h0000171D939DE045, 64'h0000D00CF58F6F84, 64'h000680681CF796E3,
    64'h002D82D8305B0FEA, 64'h011111110E066FD0, 64'h0555555555070F00,
    64'h155555555581FF00, 64'h400000000002B400, 64'h7FFFFFFFFFFF4800,
    64'h8000000000000000
  };

  localparam fx_t LN2_FX        = 81'h000B17217F7D1CF79ABC9;  // ln 2
  localparam fx_t ILN2_FX       = 81'h00171547652B82FE1777D;  // 1/ln 2
  localparam fx_t INV2SQRSIGMA0 = 81'h000269F178307778415D1;  // 1/(2*1.8205^2)
  localparam fx_t SIGMA_MIN_512  = 81'h0011DD380644568B612A5; // 1.1165085072...
  localparam fx_t SIGMA_MIN_1024 = 81'h0014C5C19990C763C0E91; // 1.2982803343...

  // T[z0] = z0^2 / (2 sigma_max^2), the LUT that replaces the squaring and
  // division of the base-sample term of the rejection exponent.
  function automatic fx_t t_lut(input logic [Z0_W-1:0] z0);
    logic [FX_W+10-1:0] p;
    p = INV2SQRSIGMA0 * (z0 * z0);
    return p[FX_W-1:0];
  endfunction

  // Controller states (Fig. 2 of the architecture description).
  typedef enum logic [3:0] {
    ST_IDLE, ST_INIT, ST_PRE, ST_NREG, ST_NLOOP,
    ST_SWITCHL, ST_SWITCHR, ST_ALOOP, ST_FADD
  } state_t;

endpackage
