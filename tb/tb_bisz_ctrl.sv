// tb_bisz_ctrl: the controller against a cycle model of its datapath
// (pre_samp 2 cycles, bef_loop 5, for_loop plus Bernoulli test 15 and 17
// cycles on the two paths, final adder 3). Four tasks with scripted
// Bernoulli outcomes take it through every transition of the state
// diagram: reseed, both accept, left-only acceptance with a failed and then
// a successful assisted round, right-only acceptance, and a round where
// both reject. For each task it checks the state sequence, which result
// register is written from which path, that the assisting bef_loop is
// restarted for the other center with its own untested candidate, and that
// a new task reuses the untested trials left by the previous one. A fifth
// pair of tasks checks that a task waiting at the end of the previous one
// starts from F_ADD without passing through IDLE.
//
// The states and their order follow the published state diagram; the
// datapath latencies in the model are this design's own.
module tb_bisz_ctrl;
  import bisz_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, restart = 1'b0, rnd_ok = 1'b1;
  logic pre_done = 1'b0, fadd_done = 1'b0;
  logic [1:0] bef_busy, cmp_done = '0, cmp_acc = '0;
  state_t state;
  logic seed_load, base_en, pre_start, nreg, for_start, fadd_start, done;
  logic [1:0] bef_start, bef_take, bef_mu, res_we, res_src;
  int checks = 0, failures = 0;

  bisz_ctrl dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  // ---- datapath timing model ----
  int bef_cnt [2] = '{0, 0};
  int pre_cnt = 0, fadd_cnt = 0, for_cnt = 0;
  logic [1:0] outcome [$];        // Bernoulli outcomes of the coming rounds
  logic [1:0] cur_out;
  assign bef_busy = {bef_cnt[1] != 0, bef_cnt[0] != 0};
  always @(posedge clk) begin
    pre_done  <= (pre_cnt == 1);
    fadd_done <= (fadd_cnt == 1);
    if (pre_cnt > 0) pre_cnt <= pre_cnt - 1;
    if (fadd_cnt > 0) fadd_cnt <= fadd_cnt - 1;
    if (pre_start) pre_cnt <= 1;
    if (fadd_start) fadd_cnt <= 2;
    for (int p = 0; p < 2; p++) begin
      if (bef_cnt[p] > 0) bef_cnt[p] <= bef_cnt[p] - 1;
      if (bef_start[p]) bef_cnt[p] <= 4;
    end
    cmp_done <= '0;
    if (for_cnt > 0) begin
      for_cnt <= for_cnt - 1;
      if (for_cnt == 3) begin cmp_done[0] <= 1'b1; cmp_acc[0] <= cur_out[0]; end
      if (for_cnt == 1) begin cmp_done[1] <= 1'b1; cmp_acc[1] <= cur_out[1]; end
    end
    if (for_start) begin
      for_cnt <= 17;
      cur_out <= outcome.pop_front();
    end
  end

  // ---- observation ----
  state_t seq [$];
  string  ev  [$];
  always @(posedge clk) if (rst_n) begin
    if (seq.size() == 0 || seq[$] != state) seq.push_back(state);
    if (res_we != 0) ev.push_back($sformatf("we%0d%0d src%0d%0d", res_we[1], res_we[0], res_src[1], res_src[0]));
    if (state inside {ST_SWITCHL, ST_SWITCHR}) for (int p = 0; p < 2; p++)
      if (bef_start[p]) ev.push_back($sformatf("bef%0d mu%0d take%0d", p, bef_mu[p], bef_take[p]));
    if (state == ST_PRE && bef_start != 0)
      ev.push_back($sformatf("pre bef%0d%0d take%0d%0d", bef_start[1], bef_start[0], bef_take[1], bef_take[0]));
  end

  task automatic run_task(input bit rs, input logic [1:0] outs [$], input state_t exp_seq [$],
                          input string exp_ev [$], input string nm);
    foreach (outs[i]) outcome.push_back(outs[i]);
    seq.delete(); ev.delete();
    @(negedge clk);
    start = 1'b1; restart = rs;
    @(negedge clk);
    start = 1'b0; restart = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
    chk(seq.size() == exp_seq.size(), $sformatf("%s: %0d states, expected %0d", nm, seq.size(), exp_seq.size()));
    foreach (exp_seq[i]) if (i < seq.size())
      chk(seq[i] == exp_seq[i], $sformatf("%s: state %0d is %s, expected %s", nm, i, seq[i].name(), exp_seq[i].name()));
    chk(ev.size() == exp_ev.size(), $sformatf("%s: %0d events, expected %0d", nm, ev.size(), exp_ev.size()));
    foreach (exp_ev[i]) if (i < ev.size())
      chk(ev[i] == exp_ev[i], $sformatf("%s: event %0d '%s', expected '%s'", nm, i, ev[i], exp_ev[i]));
    if (failures != 0) begin
      foreach (seq[i]) $display("  %s", seq[i].name());
      foreach (ev[i]) $display("  %s", ev[i]);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // 1: reseed, both accept at once
    run_task(1'b1, '{2'b11},
      '{ST_IDLE, ST_INIT, ST_PRE, ST_NREG, ST_NLOOP, ST_FADD},
      '{"pre bef11 take11", "we11 src10"}, "reseed/both");
    // 2: left accepts alone; right helped by left: one failed, one good round
    //    (only the right path's trial accepts in the second)
    run_task(1'b0, '{2'b01, 2'b00, 2'b10},
      '{ST_IDLE, ST_PRE, ST_NREG, ST_NLOOP, ST_SWITCHR, ST_NREG, ST_ALOOP,
        ST_NREG, ST_ALOOP, ST_FADD},
      '{"pre bef11 take00", "we01 src10", "bef0 mu1 take0", "we10 src10"}, "assist right");
    // 3: right accepts alone; only the right path's assisted trial accepts
    run_task(1'b0, '{2'b10, 2'b10},
      '{ST_IDLE, ST_PRE, ST_NREG, ST_NLOOP, ST_SWITCHL, ST_NREG, ST_ALOOP,
        ST_FADD},
      '{"pre bef11 take00", "we10 src10", "bef1 mu0 take0", "we01 src11"}, "assist left");
    // 3b: right accepts alone; both assisted trials accept -> left one used
    run_task(1'b0, '{2'b10, 2'b11},
      '{ST_IDLE, ST_PRE, ST_NREG, ST_NLOOP, ST_SWITCHL, ST_NREG, ST_ALOOP,
        ST_FADD},
      '{"pre bef11 take00", "we10 src10", "bef1 mu0 take0", "we01 src10"}, "assist left, both");
    // 4: both reject, then both accept
    run_task(1'b0, '{2'b00, 2'b11},
      '{ST_IDLE, ST_PRE, ST_NREG, ST_NLOOP, ST_NREG, ST_NLOOP, ST_FADD},
      '{"pre bef11 take00", "we11 src10"}, "retry");
    // 5: queued task: start is high when the first task ends, so F_ADD
    //    goes straight to PRE; the second task then ends in IDLE
    outcome.push_back(2'b11); outcome.push_back(2'b11);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    while (!done) @(negedge clk);
    @(negedge clk);
    chk(state == ST_PRE, $sformatf("queued: F_ADD -> %s, expected PRE", state.name()));
    start = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
    chk(state == ST_IDLE, $sformatf("queued: second task ends in %s", state.name()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
