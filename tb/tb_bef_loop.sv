// tb_bef_loop: trial preparation with its multiplier attached. For random
// base samples, signs, center fractions and sigma' it checks the candidate
// z = b + (2b-1) z0, and, against real arithmetic on
// x = (z-r)^2/(2 sigma'^2) - z0^2/(2*1.8205^2), that s' = min(floor(x/ln2),63)
// and z63/2^63 = x - s ln2 (to 1e-12), and the 5-cycle latency. Draws whose
// x lies within 1e-12 of a multiple of ln2 are skipped (s is then
// ambiguous at double precision).
//
// The formulas checked are Falcon's SamplerZ; the 5-cycle latency is this
// design's own schedule.
module tb_bef_loop;
  import bisz_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [4:0] z0;
  logic b;
  fx_t r, sqr2_isigma, ma, mb, mp;
  logic busy, done;
  logic signed [5:0] z_cand;
  logic [62:0] z63;
  logic [5:0] s6;
  int checks = 0, failures = 0, skipped = 0;

  bef_loop dut (.clk, .rst_n, .start, .z0, .b, .r, .sqr2_isigma, .busy, .done,
    .mul_a(ma), .mul_b(mb), .mul_p(mp), .z_cand, .z63, .s6);
  mul81 u_m (.a(ma), .b(mb), .p(mp));
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    real LN2;
    LN2 = $ln(2.0);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      real sg, rr, zz, x, xr, rp, d;
      int cyc, s, zi;
      logic [51:0] rbits;
      sg = 1.1165 + 0.7 * real'($urandom) / 4294967296.0;
      rbits = {$urandom, $urandom};
      rr = real'(rbits) / 2.0 ** 52;                 // exact in 72 bits
      @(negedge clk);
      z0 = 5'($urandom % 19); b = 1'($urandom);
      r = {9'd0, rbits, 20'd0};
      sqr2_isigma = fx_t'(longint'($floor(2.0 ** 52 / (2.0 * sg * sg)))) << 20;
      xr = real'(sqr2_isigma >> 20) / 2.0 ** 52;     // the exact value fed in
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      zi = b ? int'(z0) + 1 : -int'(z0);
      chk(cyc == 5, $sformatf("latency %0d", cyc));
      chk(int'(z_cand) == zi, "candidate z");
      zz = real'(zi) - rr;
      x  = zz * zz * xr - real'(z0) * real'(z0) / (2.0 * 1.8205 * 1.8205);
      s  = int'($floor(x / LN2));
      rp = x - real'(s) * LN2;
      if (rp < 1e-12 || LN2 - rp < 1e-12) begin skipped++; continue; end
      chk(int'(s6) == ((s > 63) ? 63 : s), $sformatf("s %0d vs %0d (x=%f)", s6, s, x));
      d = real'(z63) / 2.0 ** 63 - rp;
      chk(d < 1e-12 && d > -1e-12, $sformatf("r' %g vs %g", real'(z63) / 2.0 ** 63, rp));
    end
    $display("skipped %0d", skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
