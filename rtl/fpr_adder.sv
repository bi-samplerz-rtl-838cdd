// fpr_adder: final addition z + floor(mu) of both datapaths, as doubles.
//
// The accepted candidates z_l, z_r (small signed integers) are added to
// floor(mu_l), floor(mu_r) and returned in IEEE-754 binary64, the format
// Falcon's ffSampling continues with. As in the published design, a single
// adder serves both paths on consecutive cycles, selected by a counter
// (left first, then right). The published design keeps floor(mu) as a
// double, reads z as a double from a LUT and adds in floating point; this
// version adds in the integer domain (floor(mu) is already an integer after
// the fixed point conversion) and converts the sum once, by normalising on
// its leading one. Both give the same, exact, result because every operand
// and sum is an integer far below 2^53.
//
// Timing: `start` samples the operands; the left result is written on the
// second clock edge after the start cycle, the right one on the third
// together with a one-cycle `done` (3 cycles from start to done). Results hold until the next start.
module fpr_adder
  import bisz_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic signed [5:0] z_l,
  input  logic signed [5:0] z_r,
  input  floor_t            floor_l,
  input  floor_t            floor_r,
  output logic              done,
  output dbl_t              res_l,
  output dbl_t              res_r
);
  localparam int SW = FLOOR_W + 1;

  logic signed [5:0]  zl_q, zr_q;
  floor_t             fl_q, fr_q;
  logic [1:0]         cnt_q;       // 0 idle, 1 left, 2 right
  logic signed [SW-1:0] sum;
  dbl_t               sum_dbl;

  function automatic dbl_t int2dbl(input logic signed [SW-1:0] v);
    logic [SW-1:0] mag;
    int            p;
    logic [52:0]   m;
    mag = v[SW-1] ? -v : v;
    p   = -1;
    for (int i = 0; i < SW; i++) if (mag[i]) p = i;
    if (p < 0) return '0;
    m = 53'(mag) << (52 - p);
    return {v[SW-1], 11'(1023 + p), m[51:0]};
  endfunction

  // the shared adder: operands selected by the counter
  always_comb begin
    if (cnt_q == 2'd2) sum = SW'(fr_q) + SW'(zr_q);
    else               sum = SW'(fl_q) + SW'(zl_q);
    sum_dbl = int2dbl(sum);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zl_q <= '0; zr_q <= '0; fl_q <= '0; fr_q <= '0; cnt_q <= '0;
      done <= 1'b0; res_l <= '0; res_r <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        zl_q <= z_l; zr_q <= z_r; fl_q <= floor_l; fr_q <= floor_r;
        cnt_q <= 2'd1;
      end else if (cnt_q == 2'd1) begin
        res_l <= sum_dbl;
        cnt_q <= 2'd2;
      end else if (cnt_q == 2'd2) begin
        res_r <= sum_dbl;
        cnt_q <= 2'd0;
        done  <= 1'b1;
      end
    end
  end
endmodule
