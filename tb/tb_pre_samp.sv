// tb_pre_samp: task setup with its two multipliers attached. For random
// centers and sigma' in [sigma_min, 1.8205] it checks floor(mu) and the
// fraction exactly, ccs = sigma_min/sigma' and 1/(2 sigma'^2) to 1e-15
// relative, that ccs stays strictly below 1 (also at sigma' = sigma_min),
// and that `done` comes two cycles after `start`.
//
// The quantities are the published Pre_samp outputs; the two-cycle latency
// is this design's own.
module tb_pre_samp;
  import bisz_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  dbl_t mu_l, mu_r, isigma;
  logic busy, done;
  fx_t la, lb, lp, ra, rb, rp, r_l, r_r, ccs, sqr2_isigma;
  floor_t floor_l, floor_r;
  int checks = 0, failures = 0;
  localparam real SMIN = 1.1165085072329102588;

  pre_samp dut (.clk, .rst_n, .start, .mu_l, .mu_r, .isigma, .busy, .done,
    .mul_l_a(la), .mul_l_b(lb), .mul_l_p(lp), .mul_r_a(ra), .mul_r_b(rb), .mul_r_p(rp),
    .r_l, .r_r, .floor_l, .floor_r, .ccs, .sqr2_isigma);
  mul81 u_ml (.a(la), .b(lb), .p(lp));
  mul81 u_mr (.a(ra), .b(rb), .p(rp));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fx2r(input fx_t v);
    return (real'(v[80:40]) * 2.0 ** 40 + real'(v[39:0])) / 2.0 ** 72;
  endfunction

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  function automatic bit close(input real a, input real b);
    real d;
    d = (a > b) ? a - b : b - a;
    return d <= 1e-15 * b;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      real ml, mr, sg;
      int cyc;
      ml = (real'($urandom) / 4294967296.0 - 0.5) * 4000.0;
      mr = (real'($urandom) / 4294967296.0 - 0.5) * 40.0;
      sg = SMIN + (1.8205 - SMIN) * real'($urandom) / 4294967296.0;
      // the first tasks sit on sigma_min, where isigma rounds so that the
      // raw product sigma_min * isigma lands just above 1
      if (n < 4) sg = SMIN * (1.0 - n * 1.0e-16);
      @(negedge clk);
      mu_l = $realtobits(ml); mu_r = $realtobits(mr); isigma = $realtobits(1.0 / sg);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      chk(cyc == 2, $sformatf("latency %0d", cyc));
      chk(int'(floor_l) == int'($floor(ml)) && int'(floor_r) == int'($floor(mr)), "floors");
      chk(fx2r(r_l) == ml - $floor(ml) && fx2r(r_r) == mr - $floor(mr), "fractions");
      chk(close(fx2r(ccs), SMIN / sg), $sformatf("ccs %g vs %g", fx2r(ccs), SMIN / sg));
      chk(ccs[FX_W-1:FX_F] == '0, $sformatf("ccs %h not below 1", ccs));
      chk(close(fx2r(sqr2_isigma), 1.0 / (2.0 * sg * sg)), "isigma^2/2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
