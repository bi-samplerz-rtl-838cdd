// pre_samp: once-per-task precomputation shared by both datapaths.
//
// For a task (mu_l, mu_r, isigma), with isigma = 1/sigma' as a double, it
// produces the fractional offsets r_l, r_r of the two centers, their floors
// (kept for the final addition), ccs = sigma_min * isigma and
// isigma^2 / 2 = 1/(2 sigma'^2), all in the 9.72 fixed point format.
// The three doubles are converted in the first cycle; in the second the
// two products are formed on the datapaths' shared 81-bit multipliers
// (left one: ccs, right one: isigma^2, then halved by a shift). The
// multipliers live outside this block and are handed to it by the top for
// those cycles.
//
// Interface: a one-cycle `start` samples the inputs; `done` pulses two
// cycles later, when all outputs are valid. Outputs hold until the next
// start.
//
// Origin: the quantities (fractional part r, floor(mu), ccs = sigma_min/sigma'
// formed as sigma_min * isigma, and isigma^2/2) and the use of the shared
// MUL81 pair follow the published Pre_samp. The two-cycle schedule (against
// 19 cycles reported for the published unit) is this design's own.
//
// Note on ccs: sigma_min/sigma' is at most 1, but for sigma' at (or, after
// rounding of isigma, just above) sigma_min the fixed-point product can
// come out a few ulp above 1. ApproxExp would then return more than 2^63,
// 2y - 1 would wrap around in 64 bits and the Bernoulli test would reject
// the trials with x near 0 that it should accept almost surely. ccs is
// therefore clamped to 1 - 2^-72 (own addition; the error is below 2^-63).
//
// Constant outputs: mul_l_b is the SIGMA_MIN constant (the multiplier is
// shared, so the operand is still a port) and the 9 integer bits of r_l and
// r_r are always zero (0 <= r < 1); they are kept to give every
// fixed-point value the same 81-bit type.
module pre_samp
  import bisz_pkg::*;
#(
  parameter fx_t SIGMA_MIN = SIGMA_MIN_512
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  dbl_t        mu_l,
  input  dbl_t        mu_r,
  input  dbl_t        isigma,
  output logic        busy,
  output logic        done,
  // shared multipliers
  output fx_t         mul_l_a,
  output fx_t         mul_l_b,
  input  fx_t         mul_l_p,
  output fx_t         mul_r_a,
  output fx_t         mul_r_b,
  input  fx_t         mul_r_p,
  // results
  output fx_t         r_l,
  output fx_t         r_r,
  output floor_t      floor_l,
  output floor_t      floor_r,
  output fx_t         ccs,
  output fx_t         sqr2_isigma
);
  localparam fx_t CCS_MAX = {{FX_I{1'b0}}, {FX_F{1'b1}}};   // 1 - 2^-72

  fx_t          isig_fx, unused_fx_l, unused_fx_r;
  floor_t       fl_l, fl_r, unused_fl;
  logic [71:0]  fr_l, fr_r, unused_fr;
  fx_t          isig_q;
  logic         step_q;

  flt272int u_cvt_l (.d(mu_l),   .fx(unused_fx_l), .flr(fl_l),      .frac(fr_l));
  flt272int u_cvt_r (.d(mu_r),   .fx(unused_fx_r), .flr(fl_r),      .frac(fr_r));
  flt272int u_cvt_s (.d(isigma), .fx(isig_fx),     .flr(unused_fl), .frac(unused_fr));

  assign mul_l_a = isig_q;
  assign mul_l_b = SIGMA_MIN;
  assign mul_r_a = isig_q;
  assign mul_r_b = isig_q;
  assign busy    = step_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step_q <= 1'b0; done <= 1'b0; isig_q <= '0;
      r_l <= '0; r_r <= '0; floor_l <= '0; floor_r <= '0;
      ccs <= '0; sqr2_isigma <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        isig_q  <= isig_fx;
        r_l     <= {9'd0, fr_l};
        r_r     <= {9'd0, fr_r};
        floor_l <= fl_l;
        floor_r <= fl_r;
        step_q  <= 1'b1;
      end else if (step_q) begin
        // ccs <= 1 - 2^-72: see the note on ccs above
        ccs         <= (mul_l_p[FX_W-1:FX_F] != '0) ? CCS_MAX : mul_l_p;
        sqr2_isigma <= mul_r_p >> 1;
        step_q      <= 1'b0;
        done        <= 1'b1;
      end
    end
  end
endmodule
