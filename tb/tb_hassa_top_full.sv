// tb_hassa_top_full: one complete trial of the processor at its default
// size, with the published hyperparameters.
//
// The processor is built with every parameter at its default: 800 spins on
// a 20 x 40 torus with 4 neighbours, 16,384-entry result FIFO. The problem
// is a G11-class MAX-CUT instance generated here: a 20 x 40 toroidal grid
// (800 vertices, 1,600 edges) with random +-1 weights, mapped to J = -w,
// h = 0. Hyperparameters: n_rnd 2, I0 1..32, tau 100, beta 1, mshot 150,
// one trial. That is 150 iterations of 600 cycles = 90,000 annealing cycles
// (0.9 ms at 100 MHz) and 15,000 stored vectors, which fit in the FIFO, so
// the run must finish without a single stall. The host reads the FIFO only
// after done.
//
// Reference: the same independent model as the small end-to-end test
// predicts all 15,000 stored vectors; each one read back is compared. Also
// checks the busy cycle count (1 clear + 90,000 + 2 drain), that no stall
// happened, and that the annealer found good cuts: a random partition of
// this graph cuts about 0 (half the +1 and half the -1 edges), while the
// best and the average stored cut must both reach 500 (the best known cut of
// the real G11 graph is 564).
module tb_hassa_top_full;
  import hassa_pkg::*;

  localparam int ROWS = 20, COLS = 40, N = ROWS * COLS, DEG = 4, OWN = 2;
  localparam int E = N * OWN;
  localparam int DEPTH = 16384;
  localparam logic [31:0] SEED = 32'h2545_F491;
  localparam int I0MIN = 1, I0MAX = 32, BETA = 1, TAU = 100, MSHOT = 150, TRIALS = 1, NRND = 2;
  localparam int AW = $clog2(N + E);
  localparam int LANES = (N + 31) / 32;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic cfg_we = 1'b0;
  logic [AW-1:0] cfg_addr = '0;
  weight_t cfg_wdata = '0;
  hyper_t hp;
  logic start = 1'b0;
  logic busy, done, stall;
  logic [ITER_W-1:0] iter_idx;
  logic [TRIAL_W-1:0] trial_idx;
  logic res_req = 1'b0;
  logic [N-1:0] res_data;
  logic res_valid;
  logic [$clog2(DEPTH):0] res_count;
  logic [N-1:0] spins;

  hassa_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

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

  // ---------------------------------------------------------------- model
  int nb [N][DEG];      // neighbour index
  int wn [N][DEG];      // weight J to that neighbour
  int wcut [N][OWN];    // MAX-CUT edge weight of owned edges
  logic [31:0] rs [LANES];
  int it [N];
  bit mm [N];
  logic [N-1:0] expq [$];

  function automatic int node(int rr, int cc);
    return ((rr % ROWS + ROWS) % ROWS) * COLS + ((cc % COLS + COLS) % COLS);
  endfunction

  task automatic build_problem();
    int dr [4] = '{0, 1, 0, -1};
    int dc [4] = '{1, 0, -1, 0};
    for (int i = 0; i < N; i++)
      for (int d = 0; d < OWN; d++) wcut[i][d] = $urandom_range(1, 0) ? 1 : -1;
    for (int i = 0; i < N; i++)
      for (int d = 0; d < DEG; d++) begin
        int rr = i / COLS, cc = i % COLS;
        nb[i][d] = node(rr + dr[d], cc + dc[d]);
        // J = -w; owned edges d < OWN, mirrored ones belong to the neighbour
        wn[i][d] = (d < OWN) ? -wcut[i][d] : -wcut[nb[i][d]][d - OWN];
      end
  endtask

  function automatic logic [N-1:0] rng_bits();
    logic [LANES*32-1:0] f;
    for (int l = 0; l < LANES; l++) f[l*32 +: 32] = rs[l];
    return f[N-1:0];
  endfunction

  task automatic rng_step();
    for (int l = 0; l < LANES; l++) begin
      rs[l] ^= rs[l] << 13;
      rs[l] ^= rs[l] >> 17;
      rs[l] ^= rs[l] << 5;
    end
  endtask

  task automatic model_step(int i0v);
    int nit [N];
    logic [N-1:0] r;
    r = rng_bits();
    for (int i = 0; i < N; i++) begin
      int s = it[i];
      for (int d = 0; d < DEG; d++) s += mm[nb[i][d]] ? wn[i][d] : -wn[i][d];
      s += r[i] ? NRND : -NRND;
      if (s >= i0v) s = i0v - 1;
      else if (s < -i0v) s = -i0v;
      nit[i] = s;
    end
    for (int i = 0; i < N; i++) begin
      mm[i] = (it[i] >= 0);
      it[i] = nit[i];
    end
    rng_step();
  endtask

  int steps_per_iter;

  task automatic build_expected();
    for (int l = 0; l < LANES; l++) begin
      rs[l] = SEED + 32'(l) * 32'h9E37_79B9;
      if (rs[l] == 0) rs[l] = 1;
    end
    for (int t = 0; t < TRIALS; t++) begin
      for (int i = 0; i < N; i++) begin it[i] = 0; mm[i] = 1; end
      for (int k = 0; k < MSHOT; k++) begin
        int v = I0MIN;
        steps_per_iter = 0;
        forever begin
          steps_per_iter++;
          for (int c = 0; c < TAU; c++) begin
            model_step(v);
            if (v >= I0MAX) begin
              logic [N-1:0] s;
              for (int i = 0; i < N; i++) s[i] = (it[i] >= 0);
              expq.push_back(s);
            end
          end
          if (v >= I0MAX) break;
          v = v << BETA;
          if (v > I0MAX) v = I0MAX;
        end
      end
      model_step(I0MIN);   // two drain cycles
      model_step(I0MIN);
    end
  endtask

  function automatic int cut_value(logic [N-1:0] s);
    int c = 0;
    for (int i = 0; i < N; i++)
      for (int d = 0; d < OWN; d++)
        if (s[i] != s[nb[i][d]]) c += wcut[i][d];
    return c;
  endfunction

  // -------------------------------------------------------------- counters
  int n_tstep = 0, n_iter = 0, n_trial = 0, n_stall = 0, n_full = 0, n_read = 0;
  int n_busy = 0, n_writes = 0;
  i0_t last_i0;
  logic [ITER_W-1:0] last_iter;
  logic [TRIAL_W-1:0] last_trial;

  always @(posedge clk) if (rst_n) begin
    if (busy) n_busy++;
    if (stall) n_stall++;
    if (dut.u_fifo.full) n_full++;
    if (dut.u_ctrl.fifo_wr) n_writes++;
    if (dut.u_ctrl.i0 > last_i0 && last_i0 != 0) n_tstep++;
    if (iter_idx != last_iter) n_iter++;
    if (trial_idx != last_trial) n_trial++;
    last_i0 = dut.u_ctrl.i0;
    last_iter = iter_idx;
    last_trial = trial_idx;
  end

  // ------------------------------------------------------------ stimulus
  int got = 0, best = -1000000;
  longint sum_cut = 0;
  bit finished = 0;

  initial begin
    int exp_total, exp_busy;
    last_i0 = '0; last_iter = '0; last_trial = '0;
    build_problem();
    build_expected();
    exp_total = TRIALS * MSHOT * TAU;
    check(expq.size() == exp_total, "model vector count");
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // load h (0) and J
    for (int a = 0; a < N + E; a++) begin
      @(negedge clk);
      cfg_we = 1'b1;
      cfg_addr = AW'(a);
      cfg_wdata = (a < N) ? weight_t'(0) : weight_t'(-wcut[(a - N) / OWN][(a - N) % OWN]);
    end
    @(negedge clk) cfg_we = 1'b0;
    hp.i0min = i0_t'(I0MIN); hp.i0max = i0_t'(I0MAX); hp.beta = BETA_W'(BETA);
    hp.tau = TAU_W'(TAU); hp.mshot = ITER_W'(MSHOT); hp.trials = TRIAL_W'(TRIALS);
    hp.nrnd = nrnd_t'(NRND);
    start = 1'b1;
    @(negedge clk) start = 1'b0;
    // reader: slow while running, fast after done
    while (got < exp_total) begin
      @(negedge clk);
      res_req = (res_count != 0) && !busy;
      @(posedge clk); #1;
      if (res_valid) begin
        logic [N-1:0] e;
        int c;
        e = expq.pop_front();
        n_read++;
        checks++;
        if (res_data !== e) begin
          failures++;
          if (failures < 10) $display("vector %0d differs: %h vs %h", got, res_data, e);
        end
        c = cut_value(res_data);
        sum_cut += c;
        if (c > best) best = c;
        got++;
      end
      if (done) finished = 1;
    end
    @(negedge clk) res_req = 1'b0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    exp_busy = TRIALS * (1 + MSHOT * steps_per_iter * TAU + 2) + n_stall;
    check(steps_per_iter == 6, "6 temperature steps per iteration");
    check(n_busy == exp_busy, $sformatf("busy cycles %0d, expected %0d", n_busy, exp_busy));
    check(n_writes == exp_total, $sformatf("stored vectors %0d, expected %0d", n_writes, exp_total));
    check(res_count == 0, "FIFO empty at end");
    check(n_tstep > 0, "temperature step never happened");
    check(n_iter > 0, "iteration change never happened");
    check(n_stall == 0, "a trial must run without stalling");
    check(n_busy - n_stall == 90003, "90,000 annealing cycles plus clear and drain");
    check(n_read > 0, "read never happened");
    $display("mechanisms: temperature steps %0d, iteration changes %0d, trial changes %0d, stall cycles %0d, FIFO-full cycles %0d, reads %0d",
             n_tstep, n_iter, n_trial, n_stall, n_full, n_read);
    check(best >= 500, "best cut below 500");
    check(sum_cut >= 500 * longint'(got), "average cut below 500");
    $display("best cut %0d, average cut of stored vectors %0d/%0d", best, sum_cut, got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
