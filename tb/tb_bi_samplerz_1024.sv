// tb_bi_samplerz_1024: end-to-end test of the dual-path sampler built for
// Falcon-1024 (SIGMA_MIN = bisz_pkg::SIGMA_MIN_1024).
//
// Same checks as tb_bi_samplerz (integer results near their centers, mean,
// variance and chi-square of both paths against D(Z, mu, sigma'), each
// control mechanism seen at least once, fast-path latency, back-to-back
// tasks through the task queue), with the Falcon-1024 sigma_min, a wider
// sigma' = 1.75 and centers far from zero (1234.6 and -987.25) so that
// floor(mu) takes several bits. The variance tolerance is wider to match
// the larger variance.
//
// FAST_LAT is this design's own latency, as in tb_bi_samplerz.
module tb_bi_samplerz_1024;
  import bisz_pkg::*;

  localparam int NTASK    = 2000;
  localparam int FAST_LAT = 30;
  localparam int NQ       = 200;   // last tasks issued back to back
  localparam real SIG     = 1.75;
  localparam real MU_L    = 1234.6;
  localparam real MU_R    = -987.25;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, restart = 1'b0;
  logic [255:0] seed;
  dbl_t mu_l, mu_r, isigma, z_l, z_r;
  logic ready, done;
  logic [3:0] state;

  int checks = 0, failures = 0;

  bi_samplerz #(.SIGMA_MIN(SIGMA_MIN_1024)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #3_000_000;
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

  // ---- mechanism counters from the controller state sequence ----
  int n_init = 0, n_both = 0, n_none = 0, n_swl = 0, n_swr = 0, n_aretry = 0;
  int n_reuse = 0, n_aloop_ok = 0, n_queue = 0;
  state_t prev = ST_IDLE;
  always @(posedge clk) if (rst_n) begin
    state_t cur;
    cur = state_t'(state);
    if (cur != prev) begin
      if (cur == ST_INIT) n_init++;
      if (prev == ST_NLOOP && cur == ST_FADD) n_both++;
      if (prev == ST_NLOOP && cur == ST_NREG) n_none++;
      if (cur == ST_SWITCHL) n_swl++;
      if (cur == ST_SWITCHR) n_swr++;
      if (prev == ST_ALOOP && cur == ST_NREG) n_aretry++;
      if (prev == ST_ALOOP && cur == ST_FADD) n_aloop_ok++;
      if (prev == ST_FADD && cur == ST_PRE) n_queue++;
    end
    // a trial prepared in the previous task restarted without a new draw
    if (cur == ST_PRE && dut.u_ctrl.bef_start != 0 && dut.u_ctrl.bef_take == 0)
      n_reuse++;
    prev = cur;
  end

  // ---- reference distribution ----
  function automatic real gweight(input int z, input real mu);
    return $exp(-((z - mu) * (z - mu)) / (2.0 * SIG * SIG));
  endfunction

  int hist_l [int], hist_r [int];
  real sum_l = 0, sq_l = 0, sum_r = 0, sq_r = 0;

  task automatic chi_check(input int hist [int], input real mu, input string nm);
    real w [int];
    real tot, chi, e;
    int  lo, hi, n;
    lo = $floor(mu) - 4; hi = $floor(mu) + 5;
    tot = 0;
    for (int z = lo - 40; z <= hi + 40; z++) tot += gweight(z, mu);
    chi = 0;
    for (int z = lo; z <= hi; z++) begin
      e = NTASK * gweight(z, mu) / tot;
      n = hist.exists(z) ? hist[z] : 0;
      chi += (n - e) * (n - e) / e;
    end
    $display("%s chi-square over %0d bins = %f", nm, hi - lo + 1, chi);
    // 10 bins (9 dof plus the tails ignored): 99.9% point is 27.9
    check(chi < 27.9, {nm, " histogram"});
  endtask

  task automatic record();
    real zl, zr;
    int  z;
    zl = $bitstoreal(z_l); zr = $bitstoreal(z_r);
    check(zl == $floor(zl) && zr == $floor(zr), "results are integers");
    check((zl - MU_L) < 20.0 && (MU_L - zl) < 20.0 &&
          (zr - MU_R) < 20.0 && (MU_R - zr) < 20.0, "results near their centers");
    z = int'(zl); hist_l[z] = hist_l.exists(z) ? hist_l[z] + 1 : 1;
    z = int'(zr); hist_r[z] = hist_r.exists(z) ? hist_r[z] + 1 : 1;
    sum_l += zl; sq_l += zl * zl; sum_r += zr; sq_r += zr * zr;
  endtask

  initial begin
    int t0, lat, n_nreg, n_fast, n_fast_exact;
    real lat_sum = 0;
    n_fast = 0; n_fast_exact = 0;
    seed   = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    mu_l   = $realtobits(MU_L);
    mu_r   = $realtobits(MU_R);
    isigma = $realtobits(1.0 / SIG);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NTASK - NQ; t++) begin
      bit had_retry;
      @(negedge clk);
      while (!ready) @(negedge clk);
      start = 1'b1; restart = (t == 0);
      t0 = $time / 10;
      @(negedge clk);
      start = 1'b0; restart = 1'b0;
      had_retry = (t == 0);
      n_nreg = 0;
      while (!done) begin
        if (state_t'(state) inside {ST_SWITCHL, ST_SWITCHR}) had_retry = 1'b1;
        if (state_t'(state) == ST_NREG) n_nreg++;
        @(negedge clk);
      end
      if (n_nreg > 1) had_retry = 1'b1;
      lat = $time / 10 - t0;
      if (t > 0) lat_sum += lat;
      record();
      // a Bernoulli test that needs a second byte, or a wait for random
      // bytes, may add a few cycles; most fast tasks take exactly FAST_LAT
      if (!had_retry) begin
        check(lat >= FAST_LAT && lat <= FAST_LAT + 8, $sformatf("fast-path latency %0d", lat));
        n_fast++;
        if (lat == FAST_LAT) n_fast_exact++;
      end
    end
    // back-to-back phase: the next task is handed over while the previous
    // one runs and waits in the task queue; results arrive in order
    fork
      for (int t = 0; t < NQ; t++) begin
        @(negedge clk);
        while (!ready) @(negedge clk);
        start = 1'b1;
        @(negedge clk);
        start = 1'b0;
      end
      for (int t = 0; t < NQ; t++) begin
        @(negedge clk);
        while (!done) @(negedge clk);
        record();
      end
    join
    begin
      real m_l, v_l, m_r, v_r, ev_l, ev_r, em_l, em_r, w, tw;
      // exact mean/variance of D(Z, mu, SIG)
      em_l = 0; ev_l = 0; tw = 0;
      for (int k = -40; k <= 40; k++) begin
        w = gweight(int'($floor(MU_L)) + k, MU_L); tw += w;
        em_l += w * ($floor(MU_L) + k);
      end
      em_l /= tw;
      for (int k = -40; k <= 40; k++) begin
        w = gweight(int'($floor(MU_L)) + k, MU_L);
        ev_l += w * ($floor(MU_L) + k - em_l) ** 2;
      end
      ev_l /= tw;
      em_r = 0; ev_r = 0; tw = 0;
      for (int k = -40; k <= 40; k++) begin
        w = gweight(int'($floor(MU_R)) + k, MU_R); tw += w;
        em_r += w * ($floor(MU_R) + k);
      end
      em_r /= tw;
      for (int k = -40; k <= 40; k++) begin
        w = gweight(int'($floor(MU_R)) + k, MU_R);
        ev_r += w * ($floor(MU_R) + k - em_r) ** 2;
      end
      ev_r /= tw;
      m_l = sum_l / NTASK; v_l = sq_l / NTASK - m_l * m_l;
      m_r = sum_r / NTASK; v_r = sq_r / NTASK - m_r * m_r;
      $display("left : mean %f (exp %f) var %f (exp %f)", m_l, em_l, v_l, ev_l);
      $display("right: mean %f (exp %f) var %f (exp %f)", m_r, em_r, v_r, ev_r);
      check((m_l - em_l) ** 2 < 0.0225 && (m_r - em_r) ** 2 < 0.0225, "sample means");
      check((v_l - ev_l) ** 2 < 0.1225 && (v_r - ev_r) ** 2 < 0.1225, "sample variances");
    end
    chi_check(hist_l, MU_L, "left");
    chi_check(hist_r, MU_R, "right");
    $display("mechanisms: init %0d both-accept %0d both-reject %0d switchL %0d switchR %0d aloop-ok %0d aloop-retry %0d reuse %0d queued %0d",
             n_init, n_both, n_none, n_swl, n_swr, n_aloop_ok, n_aretry, n_reuse, n_queue);
    $display("average latency of a task (start to done, tasks 2..%0d): %f cycles",
             NTASK - NQ, lat_sum / (NTASK - NQ - 1));
    $display("fast tasks %0d, of which %0d in exactly %0d cycles", n_fast, n_fast_exact, FAST_LAT);
    check(n_fast > 0 && n_fast_exact * 10 >= n_fast * 9, "fast-path latency");
    check(n_init == 1, "one reseed");
    check(n_both > 0, "both paths accepted in NLOOP");
    check(n_none > 0, "both paths rejected in NLOOP");
    check(n_swl > 0, "SWITCHL assistance");
    check(n_swr > 0, "SWITCHR assistance");
    check(n_aloop_ok > 0, "assisted round accepted");
    check(n_aretry > 0, "assisted round retried");
    check(n_reuse > 0, "untested trial reused by next task");
    check(n_queue > 0, "queued task started from F_ADD");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
