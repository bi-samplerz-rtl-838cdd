// bi_samplerz: dual-datapath discrete Gaussian sampler (SamplerZ) for
// Falcon signing.
//
// At the leaves of Falcon's fast Fourier sampling, SamplerZ is always
// called twice with the same sigma' and two independent centers. This unit
// takes such a pair as one task (mu_l, mu_r, isigma = 1/sigma', all
// IEEE-754 doubles) and returns both samples z_l ~ D(Z, mu_l, sigma') and
// z_r ~ D(Z, mu_r, sigma') as doubles. Two datapaths (Bef_loop, For_loop,
// CMP each) run the rejection-sampling trials side by side; the task
// setup (pre_samp), the base sampler, the PRNG (ChaCha20) and the final
// adder are shared. When only one path accepts, the accepted path switches
// to the other path's center and both then try for the one open sample
// (assistance mechanism, see bisz_ctrl).
//
// Blocks: chacha20 -> two refill_control byte buffers (one per path) ->
// basesampler (z0, b per path) -> bef_loop (trial z and x = s ln2 + r') ->
// for_loop (ApproxExp) -> berexp_cmp (Bernoulli test) -> fpr_adder
// (z + floor(mu)). The two 81-bit multipliers are shared between pre_samp
// (task setup) and the two bef_loops. The random bytes are drawn from the
// ChaCha20 keystream with key `seed`, block counter starting at 0 after a
// reseed and an all-zero nonce, blocks alternating between the buffers on
// demand.
//
// Interface: while `ready` is high, a one-cycle `start` with the task on
// mu_l, mu_r, isigma (and restart, seed) hands over a task; the inputs are
// registered then. If the sampler is idle the task begins at once;
// otherwise it waits in a one-entry queue (`ready` low while the entry is
// full) and begins in the cycle the running task finishes. With `restart`
// high, the PRNG is first reseeded from `seed` and the buffers refilled
// (first call of a signature). `done` pulses for one cycle per task, in
// task order, with z_l and z_r valid; they hold until the next task
// finishes. `state` shows the controller state (bisz_pkg::state_t).
// Requires sigma_min <= sigma' <= 1.8205, |mu| < 2^31.
//
// Origin: the block structure (shared PRNG, refill logic, base sampler,
// task setup and final adder; per-path Bef_loop, For_loop and CMP; two
// shared 81-bit multipliers) and the controller states follow the published
// Bi-SamplerZ architecture. The task ports (plain registers instead of the
// FalconSign task/memory interface), the PRNG keying, the buffer arbitration
// and all cycle counts are this design's own.
module bi_samplerz
  import bisz_pkg::*;
#(
  parameter fx_t SIGMA_MIN = SIGMA_MIN_512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         restart,
  input  logic [255:0] seed,
  input  dbl_t         mu_l,
  input  dbl_t         mu_r,
  input  dbl_t         isigma,
  output logic         ready,
  output logic         done,
  output dbl_t         z_l,
  output dbl_t         z_r,
  output logic [3:0]   state
);
  // ---------------- controller ----------------
  state_t     st;
  logic       seed_load, base_en, pre_start, nreg, for_start, fadd_start, fadd_done;
  logic [1:0] bef_start, bef_take, bef_mu, bef_busy, res_we, res_src;
  logic [1:0] cmp_done, cmp_acc, cmp_busy;
  logic       pre_done, pre_busy, rnd_ok;

  // ---------------- task register and one-entry task queue ----------------
  // A task accepted while the controller is busy waits in the queue entry
  // and is launched when the running task ends (F_ADD -> PRE/INIT).
  dbl_t         mu_l_q, mu_r_q, isig_q;
  logic         pend_q, pend_rs_q;
  dbl_t         pmu_l_q, pmu_r_q, pisig_q;
  logic [255:0] pseed_q;
  logic         launch, launch_rs;

  assign ready     = !pend_q;
  assign launch    = (st == ST_IDLE && (pend_q || start)) ||
                     (st == ST_FADD && fadd_done && pend_q);
  assign launch_rs = pend_q ? pend_rs_q : restart;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mu_l_q <= '0; mu_r_q <= '0; isig_q <= '0;
      pend_q <= 1'b0; pend_rs_q <= 1'b0;
      pmu_l_q <= '0; pmu_r_q <= '0; pisig_q <= '0; pseed_q <= '0;
    end else begin
      if (launch) begin
        mu_l_q <= pend_q ? pmu_l_q : mu_l;
        mu_r_q <= pend_q ? pmu_r_q : mu_r;
        isig_q <= pend_q ? pisig_q : isigma;
      end
      if (launch && pend_q) pend_q <= 1'b0;
      else if (start && ready && st != ST_IDLE) begin
        pend_q <= 1'b1; pend_rs_q <= restart;
        pmu_l_q <= mu_l; pmu_r_q <= mu_r; pisig_q <= isigma; pseed_q <= seed;
      end
    end
  end

  // ---------------- PRNG and random buffers ----------------
  logic [255:0] key_q;
  logic [31:0]  ctr_q;
  logic         cc_start, cc_busy, cc_valid, grant_q, drop_q;
  logic [511:0] cc_block;
  logic [1:0]   refill_req, blk_valid, rd;
  logic [3:0]   rd_n [2];
  logic [79:0]  rdata [2];
  logic [7:0]   level [2];

  chacha20 u_chacha (
    .clk, .rst_n, .start(cc_start), .key(key_q), .counter(ctr_q),
    .nonce(96'd0), .busy(cc_busy), .valid(cc_valid), .block(cc_block)
  );

  // one block at a time; the left buffer wins unless it was served last
  logic grant_d;
  assign cc_start = !cc_busy && !cc_valid && !seed_load && (refill_req != 2'b00);
  assign grant_d  = refill_req[1] && (!refill_req[0] || !grant_q);
  assign blk_valid[0] = cc_valid && !drop_q && !grant_q;
  assign blk_valid[1] = cc_valid && !drop_q &&  grant_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key_q <= '0; ctr_q <= '0; grant_q <= 1'b0; drop_q <= 1'b0;
    end else begin
      if (seed_load) begin
        key_q  <= pend_q ? pseed_q : seed;
        ctr_q  <= '0;
        drop_q <= cc_busy;           // a block in flight belongs to the old key
      end else begin
        if (cc_valid) drop_q <= 1'b0;
        if (cc_start) begin
          grant_q <= grant_d;
          ctr_q   <= ctr_q + 32'd1;
        end
      end
    end
  end

  for (genvar p = 0; p < 2; p++) begin : g_refill
    refill_control u_refill (
      .clk, .rst_n, .flush(seed_load), .rd(rd[p]), .rd_n(rd_n[p]),
      .rdata(rdata[p]), .level(level[p]), .refill_req(refill_req[p]),
      .blk_valid(blk_valid[p]), .blk(cc_block)
    );
  end

  // ---------------- base sampler ----------------
  logic [Z0_W-1:0] bs_z0 [2];
  logic [1:0]      bs_b;
  assign rnd_ok = (level[0] >= 8'd10) && (level[1] >= 8'd10) && (cmp_busy == 2'b00);

  basesampler u_base (
    .clk, .rst_n, .en(base_en), .rnd_l(rdata[0]), .rnd_r(rdata[1]),
    .z0_l(bs_z0[0]), .z0_r(bs_z0[1]), .b_l(bs_b[0]), .b_r(bs_b[1])
  );

  // ---------------- task setup and shared multipliers ----------------
  fx_t    r_l, r_r, ccs, sqr2_isigma;
  floor_t floor_l, floor_r;
  fx_t    pm_a [2], pm_b [2], bm_a [2], bm_b [2], m_a [2], m_b [2], m_p [2];

  pre_samp #(.SIGMA_MIN(SIGMA_MIN)) u_pre (
    .clk, .rst_n, .start(pre_start), .mu_l(mu_l_q), .mu_r(mu_r_q), .isigma(isig_q),
    .busy(pre_busy), .done(pre_done),
    .mul_l_a(pm_a[0]), .mul_l_b(pm_b[0]), .mul_l_p(m_p[0]),
    .mul_r_a(pm_a[1]), .mul_r_b(pm_b[1]), .mul_r_p(m_p[1]),
    .r_l, .r_r, .floor_l, .floor_r, .ccs, .sqr2_isigma
  );

  // ---------------- the two datapaths ----------------
  logic [Z0_W-1:0]   cz0_q [2];      // candidate held by each bef_loop
  logic [1:0]        cb_q;
  logic signed [5:0] bz [2], lz_q [2], zres_q [2];
  logic [62:0]       bz63 [2], lz63_q [2];
  logic [5:0]        bs6 [2], ls6_q [2];
  logic [63:0]       fy [2];
  logic [1:0]        for_done, cmp_take;

  for (genvar p = 0; p < 2; p++) begin : g_path
    logic [Z0_W-1:0] z0_in;
    logic            b_in;
    assign z0_in = bef_take[p] ? bs_z0[p] : cz0_q[p];
    assign b_in  = bef_take[p] ? bs_b[p]  : cb_q[p];

    mul81 u_mul (.a(m_a[p]), .b(m_b[p]), .p(m_p[p]));
    assign m_a[p] = pre_busy ? pm_a[p] : bm_a[p];
    assign m_b[p] = pre_busy ? pm_b[p] : bm_b[p];

    bef_loop u_bef (
      .clk, .rst_n, .start(bef_start[p]), .z0(z0_in), .b(b_in),
      .r(bef_mu[p] ? r_r : r_l), .sqr2_isigma,
      .busy(bef_busy[p]), .done(),
      .mul_a(bm_a[p]), .mul_b(bm_b[p]), .mul_p(m_p[p]),
      .z_cand(bz[p]), .z63(bz63[p]), .s6(bs6[p])
    );

    for_loop u_for (
      .clk, .rst_n, .start(for_start), .z63(lz63_q[p]), .ccs,
      .busy(), .done(for_done[p]), .y(fy[p])
    );

    berexp_cmp u_cmp (
      .clk, .rst_n, .start(for_done[p]), .y(fy[p]), .s6(ls6_q[p]),
      .rnd_valid(level[p] != 8'd0), .rnd_byte(rdata[p][7:0]),
      .rnd_take(cmp_take[p]), .busy(cmp_busy[p]), .done(cmp_done[p]),
      .accept(cmp_acc[p])
    );

    assign rd[p]   = cmp_take[p] || base_en;
    assign rd_n[p] = base_en ? 4'd10 : 4'd1;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cz0_q[p] <= '0; cb_q[p] <= 1'b0;
        lz_q[p] <= '0; lz63_q[p] <= '0; ls6_q[p] <= '0; zres_q[p] <= '0;
      end else begin
        if (bef_start[p]) begin cz0_q[p] <= z0_in; cb_q[p] <= b_in; end
        if (nreg) begin lz_q[p] <= bz[p]; lz63_q[p] <= bz63[p]; ls6_q[p] <= bs6[p]; end
        if (res_we[p]) zres_q[p] <= res_src[p] ? lz_q[1] : lz_q[0];
      end
    end
  end

  // ---------------- controller and final adder ----------------
  bisz_ctrl u_ctrl (
    .clk, .rst_n, .start(launch), .restart(launch_rs), .rnd_ok, .pre_done,
    .bef_busy, .cmp_done, .cmp_acc, .fadd_done, .state(st), .seed_load,
    .base_en, .pre_start, .bef_start, .bef_take, .bef_mu, .nreg, .for_start,
    .res_we, .res_src, .fadd_start, .done
  );

  fpr_adder u_fadd (
    .clk, .rst_n, .start(fadd_start), .z_l(zres_q[0]), .z_r(zres_q[1]),
    .floor_l, .floor_r, .done(fadd_done), .res_l(z_l), .res_r(z_r)
  );

  assign state = st;
endmodule
