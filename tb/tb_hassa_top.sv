// tb_hassa_top: end-to-end test of the HA-SSA processor on a small MAX-CUT
// problem.
//
// A random +-1 weighted graph on a 4 x 6 torus (4 neighbours, like the
// G-set toroidal graphs) is mapped to an Ising model (J_ij = -w_ij, h = 0)
// and loaded through the register-write port. The processor then runs two
// trials of 3 iterations with I0 1..32, beta 1, tau 10, n_rnd 2. A reader
// drains the 16-entry result FIFO slowly, so the FIFO fills up and the
// processor must stall.
//
// Reference: a model written here recomputes the whole run from the
// published rules (xorshift32 noise lanes, p-bit update with two register
// stages, shift-based temperature schedule, storing only at I0max) and
// predicts every stored spin vector; each vector read back is compared.
// Also checks the number of stored vectors (trials * mshot * tau), the busy
// cycle count (trials * (1 clear + mshot * 6 * tau + 2 drain) + stall
// cycles), and counts each mechanism: temperature steps, iteration and
// trial changes, stalls, FIFO full, reads. A mechanism that never happened
// counts as a failure. Finally reports the best cut found.
module tb_hassa_top;
  import hassa_pkg::*;

  localparam int ROWS = 4, COLS = 6, N = ROWS * COLS, DEG = 4, OWN = 2;
  localparam int E = N * OWN;
  localparam int DEPTH = 16;
  localparam logic [31:0] SEED = 32'h2545_F491;
  localparam int I0MIN = 1, I0MAX = 32, BETA = 1, TAU = 10, MSHOT = 3, TRIALS = 2, NRND = 2;
  localparam int READ_PCT = 3;
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

  hassa_top #(.ROWS(ROWS), .COLS(COLS), .TOPO(TOPO_TORUS4), .FIFO_DEPTH(DEPTH), .SEED(SEED)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
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
      res_req = (res_count != 0) && (!busy || $urandom_range(99, 0) < READ_PCT);
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
    check(n_trial > 0, "trial change never happened");
    check(n_stall > 0, "stall never happened");
    check(n_full > 0, "FIFO full never happened");
    check(n_read > 0, "read never happened");
    $display("mechanisms: temperature steps %0d, iteration changes %0d, trial changes %0d, stall cycles %0d, FIFO-full cycles %0d, reads %0d",
             n_tstep, n_iter, n_trial, n_stall, n_full, n_read);
    $display("best cut %0d, average cut of stored vectors %0d/%0d", best, sum_cut, got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
