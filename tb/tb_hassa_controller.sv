// tb_hassa_controller: self-checking test of the temperature schedule and
// run control.
//
// For each hyperparameter set the test builds the expected sequence of
// enabled annealing cycles independently: per iteration, I0 = I0min held tau
// cycles, then multiplied by 2^beta (clamped to I0max) until the tau cycles
// at I0max are done; mshot iterations per trial, then two drain cycles. The
// FIFO write of a cycle must equal "I0 was at I0max two enabled cycles
// earlier". Every cycle it compares en, i0, nrnd, fifo_wr and stall, while
// the test drives fifo_full high at random moments (stalls must then hold
// en low exactly when a write is due). Checks the cycle counts: with the
// published set (I0min 1, I0max 32, beta 1, tau 100) one iteration is 600
// enabled cycles; the number of clear pulses equals trials, done pulses once,
// and fifo_rd = res_req & !fifo_empty.
module tb_hassa_controller;
  import hassa_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  hyper_t hp_in;
  logic fifo_full = 1'b0, fifo_empty = 1'b1, res_req = 1'b0;
  logic en, clr, fifo_wr, fifo_rd, stall, busy, done;
  i0_t i0;
  nrnd_t nrnd;
  logic [ITER_W-1:0] iter_idx;
  logic [TRIAL_W-1:0] trial_idx;

  int checks = 0, failures = 0;
  int n_stall_total = 0;

  hassa_controller dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // One complete run with the given hyperparameters.
  task automatic run(int i0min, int i0max, int beta, int tau, int mshot,
                     int trials, int nr, int full_pct, int exp_iter_cycles);
    int sched [$];      // I0 per enabled cycle of one trial (0 = drain)
    int k, t, clears, dones, iter_cycles, writes, exp_writes;
    int timeout;
    // expected schedule of one iteration
    int one_iter [$];
    int v;
    v = i0min;
    forever begin
      for (int c = 0; c < tau; c++) one_iter.push_back(v);
      if (v >= i0max) break;
      v = v << beta;
      if (v > i0max) v = i0max;
    end
    iter_cycles = one_iter.size();
    check(exp_iter_cycles < 0 || iter_cycles == exp_iter_cycles,
          $sformatf("iteration length %0d, expected %0d", iter_cycles, exp_iter_cycles));
    for (int it = 0; it < mshot; it++) sched = {sched, one_iter};
    sched.push_back(0); sched.push_back(0);   // drain

    hp_in.i0min = i0_t'(i0min); hp_in.i0max = i0_t'(i0max);
    hp_in.beta = BETA_W'(beta); hp_in.tau = TAU_W'(tau);
    hp_in.mshot = ITER_W'(mshot); hp_in.trials = TRIAL_W'(trials);
    hp_in.nrnd = nrnd_t'(nr);
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    k = 0; t = 0; clears = 0; dones = 0; writes = 0;
    exp_writes = trials * mshot * tau;
    timeout = 0;
    while (dones == 0 && timeout < 300000) begin
      bit exp_wr, exp_stall;
      timeout++;
      fifo_full  = ($urandom_range(99, 0) < full_pct);
      res_req    = 1'($urandom);
      fifo_empty = 1'($urandom);
      #1;
      check(fifo_rd == (res_req && !fifo_empty), "fifo_rd");
      if (clr) begin
        clears++;
        check(k == 0 || k == sched.size(), $sformatf("clear in the middle of a trial (k=%0d)", k));
        k = 0;
        check(!en && !fifo_wr, "en or write during clear");
      end else if (busy) begin
        exp_wr    = (k >= 2) && (sched[k-2] >= i0max);
        exp_stall = exp_wr && fifo_full;
        check(stall == exp_stall, $sformatf("stall=%0b exp %0b at k=%0d", stall, exp_stall, k));
        check(en == !exp_stall, $sformatf("en=%0b at k=%0d", en, k));
        check(fifo_wr == (exp_wr && !fifo_full), $sformatf("fifo_wr=%0b at k=%0d", fifo_wr, k));
        check(nrnd == nrnd_t'(nr), "nrnd");
        if (sched[k] != 0)
          check(int'(i0) == sched[k], $sformatf("i0=%0d exp %0d at k=%0d trial %0d", i0, sched[k], k, t));
        if (stall) n_stall_total++;
        if (fifo_wr) writes++;
        if (en) k++;
      end
      @(posedge clk);
      #1;
      if (done) dones++;
      @(negedge clk);
    end
    check(dones == 1, "done pulse");
    check(k == sched.size(), $sformatf("enabled cycles in last trial %0d, expected %0d", k, sched.size()));
    check(clears == trials, $sformatf("clears %0d, expected %0d", clears, trials));
    check(writes == exp_writes, $sformatf("writes %0d, expected %0d", writes, exp_writes));
    check(!busy, "busy after done");
    $display("run I0 %0d..%0d beta %0d tau %0d: %0d cycles/iteration, %0d writes, %0d clears",
             i0min, i0max, beta, tau, iter_cycles, writes, clears);
  endtask

  initial begin
    hp_in = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // published hyperparameters, 3 iterations x 2 trials, no back-pressure
    run(1, 32, 1, 100, 3, 2, 2, 0, 600);
    // same with back-pressure
    run(1, 32, 1, 100, 2, 1, 2, 30, 600);
    // 1..16, tau 100: 5 steps = 500 cycles (the memory example in the text)
    run(1, 16, 1, 100, 1, 1, 2, 0, 500);
    // shift by 2 with clamping: 3, 12, 40 (48 clamped)
    run(3, 40, 2, 5, 4, 3, 7, 20, 15);
    check(n_stall_total > 0, "no stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
