// for_loop: ApproxExp of one datapath, y = 2^63 * ccs * exp(-r') approx.
//
// Evaluates Falcon's degree-12 polynomial approximation of exp(-r') for
// 0 <= r' < ln2 by Horner's rule in 63-bit fixed point:
//   y = C[0];  y = C[i] - ((z * y) >> 63)  for i = 1..12;  y = (ccs * y) >> 63
// with z = floor(2^63 r') and ccs as floor(2^63 ccs). One multiplier
// (MUL63) is shared by all 13 products: a counter selects z or ccs as its
// first operand and the coefficient C[i] from the LUT, so one product is
// formed per clock.
//
// Timing: `start` samples z63 and ccs; `done` pulses 14 cycles later with
// `y` valid, held until the next start.
//
// Origin: the polynomial and its coefficients are Falcon's ApproxExp; the
// single multiplier selected by a counter, with the coefficients in a LUT,
// follows the published For_loop. Unlike the published unit, the subtractor
// is not shared with the CMP unit. ccs is at most 1 (sigma_min <= sigma'), so
// only ccs bits [72:9] are used.
module for_loop
  import bisz_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [62:0] z63,
  input  fx_t         ccs,
  output logic        busy,
  output logic        done,
  output logic [63:0] y
);
  logic [3:0]  cnt_q;      // 0 idle, 1..12 Horner steps, 13 ccs scaling
  logic [63:0] z_q, ccs_q, y_q;
  logic [63:0] m_a, m_p;

  mul63 u_mul (.a(m_a), .b(y_q), .p(m_p));

  assign m_a  = (cnt_q == 4'd13) ? ccs_q : z_q;
  assign busy = (cnt_q != 4'd0);
  assign y    = y_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0; z_q <= '0; ccs_q <= '0; y_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        z_q   <= {1'b0, z63};
        ccs_q <= ccs[FX_F:FX_F-63];      // floor(2^63 * ccs), ccs <= 1
        y_q   <= EXP_C[0];
        cnt_q <= 4'd1;
      end else if (cnt_q == 4'd13) begin
        y_q   <= m_p;
        cnt_q <= 4'd0;
        done  <= 1'b1;
      end else if (cnt_q != 4'd0) begin
        y_q   <= EXP_C[cnt_q] - m_p;
        cnt_q <= cnt_q + 4'd1;
      end
    end
  end
endmodule
