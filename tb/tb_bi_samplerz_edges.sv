// tb_bi_samplerz_edges: end-to-end test of the dual-path sampler (default
// parameters, Falcon-512 sigma_min) at the edges of its input range.
//
// Four phases of NPH tasks each, every phase with its own sigma' and pair
// of centers, without a reseed between phases (the first task reseeds):
//   0: sigma' = sigma_min (ccs = 1), centers 0.0 and -0.999999 (r = 0 and
//      r just above 0)
//   1: sigma' = 1.8205 (largest, smallest ccs), centers 100.5 and -3.0000001
//      (r just below 1)
//   2: sigma' = 1.3, centers 2^20 + 0.25 and -(2^24) + 0.75 (large floors)
//   3: sigma' = 1.6, both centers equal (17.125), so both paths and the
//      assistance mechanism serve the same distribution
// For each phase and path the histogram of the samples is compared with
// D(Z, mu, sigma') by a chi-square test over the ten most likely values,
// and the sample mean with the exact mean (tolerance 4.5 standard errors).
// Every result must be an integer-valued double within 20 of its center.
// The distributions are computed here with real arithmetic; the phases
// follow the stated range of Falcon's sigma' (sigma_min to sigma_max) and
// are this test's own choice of edge cases.
module tb_bi_samplerz_edges;
  import bisz_pkg::*;

  localparam int NPH  = 1500;
  localparam int NP   = 4;
  localparam real SMIN = 1.1165085072329102588;
  localparam real SIGS  [NP] = '{SMIN, 1.8205, 1.3, 1.6};
  localparam real MUSL  [NP] = '{0.0, 100.5, 1048576.25, 17.125};
  localparam real MUSR  [NP] = '{-0.999999, -3.0000001, -16777215.25, 17.125};

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, restart = 1'b0;
  logic [255:0] seed;
  dbl_t mu_l, mu_r, isigma, z_l, z_r;
  logic ready, done;
  logic [3:0] state;

  int checks = 0, failures = 0;

  bi_samplerz dut (.*);

  always #5 clk = ~clk;

  initial begin
    #8_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic real gweight(input longint z, input real mu, input real sig);
    return $exp(-((z - mu) * (z - mu)) / (2.0 * sig * sig));
  endfunction

  // chi-square of a histogram (offsets from floor(mu)) and mean check
  task automatic judge(input int hist [int], input real sum, input real mu,
                       input real sig, input string nm);
    real w [int];
    real tot, chi, e, em, ev, m;
    longint fl;
    int n;
    fl = longint'($floor(mu));
    tot = 0; em = 0;
    for (int k = -40; k <= 40; k++) begin
      w[k] = gweight(fl + k, mu, sig); tot += w[k]; em += w[k] * k;
    end
    em /= tot;
    ev = 0;
    for (int k = -40; k <= 40; k++) ev += w[k] * (k - em) ** 2;
    ev /= tot;
    chi = 0;
    for (int k = -4; k <= 5; k++) begin
      e = NPH * w[k] / tot;
      n = hist.exists(k) ? hist[k] : 0;
      chi += (n - e) * (n - e) / e;
    end
    m = sum / NPH;
    for (int k = -4; k <= 5; k++)
      $display("  %0d: %0d vs %f", k, hist.exists(k) ? hist[k] : 0, NPH * w[k] / tot);
    $display("%s: mean offset %f (exp %f), chi-square %f", nm, m, em, chi);
    // 10 bins: 99.9% point of chi-square with 9 degrees of freedom is 27.9
    check(chi < 27.9, {nm, " histogram"});
    check((m - em) ** 2 < 20.25 * ev / NPH, {nm, " mean"});
  endtask

  initial begin
    int hl [int], hr [int];
    real sl, sr, zl, zr;
    int k;
    seed = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int ph = 0; ph < NP; ph++) begin
      hl.delete(); hr.delete(); sl = 0; sr = 0;
      mu_l   = $realtobits(MUSL[ph]);
      mu_r   = $realtobits(MUSR[ph]);
      isigma = $realtobits(1.0 / SIGS[ph]);
      for (int t = 0; t < NPH; t++) begin
        @(negedge clk);
        while (!ready) @(negedge clk);
        start = 1'b1; restart = (ph == 0 && t == 0);
        @(negedge clk);
        start = 1'b0; restart = 1'b0;
        while (!done) @(negedge clk);
        zl = $bitstoreal(z_l); zr = $bitstoreal(z_r);
        check(zl == $floor(zl) && zr == $floor(zr), "results are integers");
        check((zl - MUSL[ph]) ** 2 < 400.0 && (zr - MUSR[ph]) ** 2 < 400.0,
              "results near their centers");
        k = int'(zl - $floor(MUSL[ph])); hl[k] = hl.exists(k) ? hl[k] + 1 : 1; sl += k;
        k = int'(zr - $floor(MUSR[ph])); hr[k] = hr.exists(k) ? hr[k] + 1 : 1; sr += k;
      end
      judge(hl, sl, MUSL[ph], SIGS[ph], $sformatf("phase %0d left", ph));
      judge(hr, sr, MUSR[ph], SIGS[ph], $sformatf("phase %0d right", ph));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
