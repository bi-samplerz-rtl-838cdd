// bef_loop: per-datapath preparation of one rejection-sampling trial.
//
// From a base sample z0, a sign bit b and the task values r (fractional
// part of the center) and isigma^2/2, it forms the candidate
//   z = b + (2b - 1) z0                 (z0 + 1 if b = 1, -z0 if b = 0)
// and the exponent of the acceptance probability
//   x = (z - r)^2 / (2 sigma'^2) - z0^2 / (2 sigma_max^2),
// then splits x = s ln2 + r' with 0 <= r' < ln2 as BerExp requires, and
// returns s' = min(s, 63) and z63 = floor(2^63 r').
// |z - r| is either z0 + r (b = 0, the concatenation {z0, r}) or
// z0 + 1 - r (b = 1), so the square needs no signed arithmetic; the
// second term comes from the LUT T[z0] (bisz_pkg::t_lut). x >= 0 always
// holds because sigma' <= sigma_max and |z - r| >= z0.
//
// All four products go through one 81-bit multiplier, lent by the top
// (shared with pre_samp): (z - r)^2, times isigma^2/2, x times 1/ln2 (its
// integer part is s), s times ln2. Because 1/ln2 is truncated, s can come
// out one too small or too large near a multiple of ln2; the last step
// corrects it so that r' always lands in [0, ln2).
//
// Timing: `start` samples the inputs; `done` pulses 5 cycles later with
// z_cand, z63 and s6 valid; they hold until the next start.
//
// Origin: the steps (|z - r| from {z0, r} or {z0, r} + 1 depending on b, the
// square, the scaling by 1/(2 sigma'^2), the T[z0] table, the reduction by
// 1/ln2 and ln2 into s and r') and the use of the shared 81-bit multiplier
// follow the published Bi-SamplerZ datapath. The order of the products, the
// one-step correction of s, the five-cycle schedule and forming T[z0] from
// a constant function are this design's own.
module bef_loop
  import bisz_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [Z0_W-1:0]   z0,
  input  logic              b,
  input  fx_t               r,
  input  fx_t               sqr2_isigma,
  output logic              busy,
  output logic              done,
  // shared multiplier
  output fx_t               mul_a,
  output fx_t               mul_b,
  input  fx_t               mul_p,
  // results
  output logic signed [5:0] z_cand,
  output logic [62:0]       z63,
  output logic [5:0]        s6
);
  logic [2:0]       ph_q;      // 0 idle, 1..4 multiplier steps
  fx_t              acc_q;     // |z-r|, (z-r)^2, then x
  fx_t              x_q;
  logic [8:0]       s_q;
  logic [Z0_W-1:0]  z0_q;
  fx_t              isig2_q;

  fx_t              rr, rr_lo, rr_hi;
  logic [8:0]       s_fix;

  always_comb begin
    mul_a = acc_q;
    mul_b = acc_q;
    unique case (ph_q)
      3'd1: begin mul_a = acc_q;                 mul_b = acc_q;   end
      3'd2: begin mul_a = acc_q;                 mul_b = isig2_q; end
      3'd3: begin mul_a = x_q;                   mul_b = ILN2_FX; end
      3'd4: begin mul_a = {s_q, {FX_F{1'b0}}};   mul_b = LN2_FX;  end
      default: ;
    endcase
    // last step: r' = x - s ln2 with a one-step correction either way
    rr    = x_q - mul_p;
    rr_lo = rr + LN2_FX;
    rr_hi = rr - LN2_FX;
    s_fix = s_q;
    if (x_q < mul_p) begin
      rr    = rr_lo;
      s_fix = s_q - 9'd1;
    end else if (rr >= LN2_FX) begin
      rr    = rr_hi;
      s_fix = s_q + 9'd1;
    end
  end

  assign busy = (ph_q != 3'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_q <= '0; acc_q <= '0; x_q <= '0; s_q <= '0; z0_q <= '0; isig2_q <= '0;
      done <= 1'b0; z_cand <= '0; z63 <= '0; s6 <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        z0_q    <= z0;
        isig2_q <= sqr2_isigma;
        z_cand  <= b ? 6'(z0) + 6'sd1 : -6'(z0);
        acc_q   <= b ? ((FX_W'(z0) + FX_W'(1)) << FX_F) - r
                     : {4'd0, z0, r[FX_F-1:0]};
        ph_q    <= 3'd1;
      end else begin
        unique case (ph_q)
          3'd1: begin acc_q <= mul_p;                  ph_q <= 3'd2; end
          3'd2: begin x_q   <= mul_p - t_lut(z0_q);    ph_q <= 3'd3; end
          3'd3: begin s_q   <= mul_p[FX_W-1:FX_F];     ph_q <= 3'd4; end
          3'd4: begin
            z63  <= rr[FX_F-1:FX_F-63];
            s6   <= (s_fix > 9'd63) ? 6'd63 : s_fix[5:0];
            done <= 1'b1;
            ph_q <= 3'd0;
          end
          default: ;
        endcase
      end
    end
  end
endmodule
