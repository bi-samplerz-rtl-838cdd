// basesampler: shared RCDT base sampler of the two datapaths.
//
// Each path draws a 72-bit uniform u and compares it with all 18 entries of
// the reverse cumulative distribution table at once. Because the table is
// strictly decreasing, the comparison vector c[i] = (u < RCDT[i]) is a run
// of ones followed by zeros, and the sample z0 is the length of that run.
// Instead of adding the 18 comparison bits, the position of the single
// 1->0 transition is detected (sel[i] = c[i-1] & ~c[i], sel[0] = ~c[0],
// sel[18] = c[17]) and that one-hot select drives a constant index onto the
// 5-bit result. The published design resolves the select with tri-state
// buffers on a shared bus (ASIC) or a priority encoder (FPGA); here the
// bus is written as an AND-OR of the one-hot selects, which is what a
// tri-state bus with exactly one driver computes and which synthesizes on
// any target.
//
// The sign bit b of each candidate (one uniform byte, bit 0) is taken from
// the same random word: rnd_x[71:0] is u and rnd_x[72] is b.
//
// Interface: with `en` high the candidates (z0_l, b_l, z0_r, b_r) are
// registered at the clock edge, so they are available one cycle after the
// random words are presented.
module basesampler
  import bisz_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  logic [79:0]     rnd_l,
  input  logic [79:0]     rnd_r,
  output logic [Z0_W-1:0] z0_l,
  output logic [Z0_W-1:0] z0_r,
  output logic            b_l,
  output logic            b_r
);
  function automatic logic [Z0_W-1:0] rcdt_index(input logic [71:0] u);
    logic [RCDT_N-1:0] c;
    logic [RCDT_N:0]   sel;
    logic [Z0_W-1:0]   z;
    for (int i = 0; i < RCDT_N; i++) c[i] = (u < RCDT[i]);
    sel[0] = ~c[0];
    for (int i = 1; i < RCDT_N; i++) sel[i] = c[i-1] & ~c[i];
    sel[RCDT_N] = c[RCDT_N-1];
    z = '0;
    for (int i = 0; i <= RCDT_N; i++) z |= {Z0_W{sel[i]}} & Z0_W'(i);
    return z;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z0_l <= '0; z0_r <= '0; b_l <= 1'b0; b_r <= 1'b0;
    end else if (en) begin
      z0_l <= rcdt_index(rnd_l[71:0]);
      z0_r <= rcdt_index(rnd_r[71:0]);
      b_l  <= rnd_l[72];
      b_r  <= rnd_r[72];
    end
  end
endmodule
