// bisz_ctrl: controller of the dual-path sampler (state machine and the
// scheduling of the assistance mechanism).
//
// States follow the published state diagram: IDLE, INIT (reseed the PRNG,
// fill the random buffers, draw the first base samples), PRE (task setup
// and first trial preparation), NREG (register the prepared trials), NLOOP
// (both paths test their own trial), SWITCHL/SWITCHR (one path accepted;
// the accepted path's Bef_loop recomputes its trial for the other path's
// center), ALOOP (both paths test trials for the one center still open)
// and F_ADD (final addition). Transitions:
//   IDLE  -> INIT  on start & restart,   IDLE -> PRE on start & !restart
//   (PRE starts pre_samp as soon as no Bef_loop is busy)
//   INIT  -> PRE   once a base-sample pair is drawn
//   PRE   -> NREG  once pre_samp and both bef_loop trials are done
//   NREG  -> NLOOP, or ALOOP when assisting
//   NLOOP -> F_ADD both accept; SWITCHR only left accepts; SWITCHL only
//            right accepts; NREG none accepts (after the next trials are
//            prepared)
//   SWITCHx -> NREG once both trials for the open center are prepared
//   ALOOP -> F_ADD if either path accepts, else NREG
//   F_ADD -> IDLE  when the final adder is done (pulse `done`), or
//            directly to INIT/PRE if `start` is high then (next task
//            queued); the adder is started in the first F_ADD cycle,
//            after the results are written.
// Acceptance is evaluated once both Bernoulli tests of a round have
// decided (an own choice: taking whichever decides first would make the
// choice depend on how many bytes the test used, which depends on z); if
// both accept in ALOOP the left trial is used.
//
// Trial bookkeeping, per path p: `bvalid[p]` a drawn base sample waiting,
// `fresh[p]` the Bef_loop holds an untested trial, `mu_used[p]` which
// center (0 left, 1 right) it was prepared for and `task_ok[p]` that it was
// prepared with this task's setup. While the loop runs, each idle Bef_loop
// is (re)started towards the center it should be working for: with its own
// untested candidate when it has one (so an untested candidate is never
// thrown away, also across tasks), else with a newly drawn base sample.
// Base samples are drawn for both paths at once, when both are used up and
// both random buffers hold 10 bytes.
module bisz_ctrl
  import bisz_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       restart,
  input  logic       rnd_ok,       // both random buffers can supply a draw
  input  logic       pre_done,
  input  logic [1:0] bef_busy,
  input  logic [1:0] cmp_done,
  input  logic [1:0] cmp_acc,
  input  logic       fadd_done,
  output state_t     state,
  output logic       seed_load,    // reseed PRNG and empty the buffers
  output logic       base_en,      // draw a base-sample pair
  output logic       pre_start,
  output logic [1:0] bef_start,
  output logic [1:0] bef_take,     // bef candidate comes from the base sampler
  output logic [1:0] bef_mu,       // center used by each bef: 0 left, 1 right
  output logic       nreg,         // latch prepared trials into loop registers
  output logic       for_start,
  output logic [1:0] res_we,       // write result of center l / r
  output logic [1:0] res_src,      // per center: 0 take left trial, 1 right
  output logic       fadd_start,
  output logic       done
);
  state_t     st_q, st_d;
  logic [1:0] bvalid_q, fresh_q, mu_used_q, task_ok_q;
  logic       pre_ok_q, pre_iss_q, assist_q, tgt_q, fadd_go_q;
  logic [1:0] cdone_q, cacc_q;
  logic [1:0] want;          // center each bef should serve
  logic       bef_phase;     // states in which befs are scheduled
  logic [1:0] ready;         // bef holds an untested trial for `want`
  logic [1:0] cdone_n, cacc_n;

  assign state      = st_q;
  assign fadd_start = fadd_go_q;   // first cycle of F_ADD, results written

  always_comb begin
    unique case (st_q)
      ST_SWITCHL: want = 2'b00;
      ST_SWITCHR: want = 2'b11;
      ST_ALOOP:   want = {tgt_q, tgt_q};
      default:    want = 2'b10;       // path l -> left, path r -> right
    endcase
    bef_phase = (st_q == ST_NLOOP) || (st_q == ST_ALOOP) ||
                (st_q == ST_SWITCHL) || (st_q == ST_SWITCHR) ||
                (st_q == ST_PRE && pre_ok_q);
    for (int p = 0; p < 2; p++)
      ready[p] = fresh_q[p] && task_ok_q[p] && (mu_used_q[p] == want[p]) && !bef_busy[p];
    cdone_n = cdone_q | cmp_done;
    cacc_n  = cacc_q  | (cmp_done & cmp_acc);
  end

  // Task setup starts once no Bef_loop is still busy with a trial of the
  // previous task (they share the multipliers with pre_samp).
  assign pre_start = (st_q == ST_PRE) && !pre_iss_q && (bef_busy == 2'b00);

  // Bef_loop scheduling.
  always_comb begin
    bef_start = '0;
    bef_take  = '0;
    bef_mu    = want;
    for (int p = 0; p < 2; p++) begin
      if (bef_phase && !bef_busy[p] && !ready[p]) begin
        if (fresh_q[p]) begin
          bef_start[p] = 1'b1;
        end else if (bvalid_q[p]) begin
          bef_start[p] = 1'b1;
          bef_take[p]  = 1'b1;
        end
      end
    end
  end

  assign base_en = (bvalid_q == 2'b00) && rnd_ok &&
                   (st_q inside {ST_INIT, ST_PRE, ST_NLOOP, ST_ALOOP,
                                 ST_SWITCHL, ST_SWITCHR});

  // Next state and one-cycle commands.
  always_comb begin
    st_d       = st_q;
    seed_load  = 1'b0;
    nreg       = 1'b0;
    for_start  = 1'b0;
    res_we     = '0;
    res_src    = 2'b10;
    done       = 1'b0;
    unique case (st_q)
      ST_IDLE: if (start) begin
        if (restart) begin st_d = ST_INIT; seed_load = 1'b1; end
        else st_d = ST_PRE;
      end
      ST_INIT: if (bvalid_q == 2'b11) st_d = ST_PRE;
      ST_PRE:  if (pre_ok_q && ready == 2'b11) begin st_d = ST_NREG; nreg = 1'b1; end
      ST_NREG: begin
        st_d = assist_q ? ST_ALOOP : ST_NLOOP;
        for_start = 1'b1;
      end
      ST_NLOOP: if (cdone_n == 2'b11) begin
        unique case (cacc_n)
          2'b11: begin st_d = ST_FADD; res_we = 2'b11; end
          2'b01: begin st_d = ST_SWITCHR; res_we = 2'b01; end   // left accepted
          2'b10: begin st_d = ST_SWITCHL; res_we = 2'b10; end   // right accepted
          default: if (ready == 2'b11) begin st_d = ST_NREG; nreg = 1'b1; end
        endcase
      end
      ST_SWITCHL, ST_SWITCHR: if (ready == 2'b11) begin st_d = ST_NREG; nreg = 1'b1; end
      ST_ALOOP: if (cdone_n == 2'b11) begin
        if (cacc_n != 2'b00) begin
          st_d = ST_FADD;
          res_we[tgt_q]  = 1'b1;
          res_src[tgt_q] = ~cacc_n[0];   // left trial if it accepted
        end else if (ready == 2'b11) begin
          st_d = ST_NREG; nreg = 1'b1;
        end
      end
      ST_FADD: if (fadd_done) begin
        done = 1'b1;
        // a queued task starts at once, else wait in IDLE
        if (!start)       st_d = ST_IDLE;
        else if (restart) begin st_d = ST_INIT; seed_load = 1'b1; end
        else              st_d = ST_PRE;
      end
      default: st_d = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= ST_IDLE;
      bvalid_q <= '0; fresh_q <= '0; mu_used_q <= '0; task_ok_q <= '0;
      pre_ok_q <= 1'b0; pre_iss_q <= 1'b0; fadd_go_q <= 1'b0; assist_q <= 1'b0; tgt_q <= 1'b0;
      cdone_q <= '0; cacc_q <= '0;
    end else begin
      st_q <= st_d;
      // base-sample pair bookkeeping
      if (seed_load) bvalid_q <= '0;
      else begin
        for (int p = 0; p < 2; p++) if (bef_take[p]) bvalid_q[p] <= 1'b0;
        if (base_en) bvalid_q <= 2'b11;
      end
      if (seed_load) fresh_q <= '0;
      // bef trial bookkeeping
      for (int p = 0; p < 2; p++) if (bef_start[p]) begin
        fresh_q[p]   <= 1'b1;
        mu_used_q[p] <= bef_mu[p];
        task_ok_q[p] <= 1'b1;
      end
      if (nreg) fresh_q <= '0;
      // task setup
      if (st_d == ST_PRE && st_q != ST_PRE) begin
        pre_ok_q  <= 1'b0;
        pre_iss_q <= 1'b0;
        task_ok_q <= '0;
        assist_q  <= 1'b0;
      end else begin
        if (pre_start) pre_iss_q <= 1'b1;
        if (pre_done)  pre_ok_q  <= 1'b1;
      end
      fadd_go_q <= (st_d == ST_FADD) && (st_q != ST_FADD);
      // Bernoulli results of the running round
      if (for_start) begin
        cdone_q <= '0; cacc_q <= '0;
      end else begin
        cdone_q <= cdone_n; cacc_q <= cacc_n;
      end
      // assistance target
      if (st_q == ST_NLOOP && st_d == ST_SWITCHL) begin assist_q <= 1'b1; tgt_q <= 1'b0; end
      if (st_q == ST_NLOOP && st_d == ST_SWITCHR) begin assist_q <= 1'b1; tgt_q <= 1'b1; end
    end
  end

  a_one_result_path: assert property (@(posedge clk) disable iff (!rst_n)
    (st_q == ST_ALOOP && res_we != 0) |-> $onehot(res_we));
endmodule
