// tb_spin_gate_array: self-checking test of the wired spin-gate network.
//
// Two small arrays, a 4 x 5 torus with 4 neighbours and a 4 x 5 King's graph
// torus with 8 neighbours, run side by side with random biases, random
// symmetric edge weights, random noise bits, temperatures, enables and
// clears. A model written here keeps its own symmetric weight matrix and
// neighbour lists (grid arithmetic, independent of the design's tables) and
// updates every spin with the p-bit rule; the spin vectors are compared every
// cycle. Edge registers are loaded following the documented numbering (each
// spin owns its right/down, and for 8 neighbours also down-right/down-left,
// edges).
module tb_spin_gate_array;
  import hassa_pkg::*;

  localparam int ROWS = 4, COLS = 5, N = ROWS * COLS;
  localparam int E4 = N * 2, E8 = N * 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic en = 1'b0, clr = 1'b0;
  i0_t i0 = 8'd1;
  nrnd_t nrnd = '0;
  logic [N-1:0] r = '0;
  weight_t h [N];
  weight_t j4 [E4];
  weight_t j8 [E8];
  logic [N-1:0] m4, m8;

  int checks = 0, failures = 0;

  spin_gate_array #(.ROWS(ROWS), .COLS(COLS), .TOPO(TOPO_TORUS4)) dut4 (
    .clk, .rst_n, .en, .clr, .i0, .nrnd, .r, .h, .j(j4), .m(m4));
  spin_gate_array #(.ROWS(ROWS), .COLS(COLS), .TOPO(TOPO_KING8)) dut8 (
    .clk, .rst_n, .en, .clr, .i0, .nrnd, .r, .h, .j(j8), .m(m8));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model state, index 0 = 4-neighbour, 1 = 8-neighbour
  int W [2][N][N];
  int it [2][N];
  bit mm [2][N];

  function automatic int wrap(int v, int n);
    return (v % n + n) % n;
  endfunction

  function automatic int node(int rr, int cc);
    return wrap(rr, ROWS) * COLS + wrap(cc, COLS);
  endfunction

  // owned directions: (dr, dc)
  int odr [4] = '{0, 1, 1, 1};
  int odc [4] = '{1, 0, 1, -1};

  task automatic load_weights();
    for (int g = 0; g < 2; g++)
      for (int a = 0; a < N; a++)
        for (int b = 0; b < N; b++) W[g][a][b] = 0;
    for (int i = 0; i < N; i++) begin
      int rr = i / COLS, cc = i % COLS;
      for (int d = 0; d < 4; d++) begin
        int nb = node(rr + odr[d], cc + odc[d]);
        int w = $urandom_range(15, 0) - 8;
        j8[i * 4 + d] = weight_t'(w);
        W[1][i][nb] = w; W[1][nb][i] = w;
        if (d < 2) begin
          int w4 = $urandom_range(15, 0) - 8;
          j4[i * 2 + d] = weight_t'(w4);
          W[0][i][nb] = w4; W[0][nb][i] = w4;
        end
      end
      h[i] = weight_t'($urandom_range(15, 0) - 8);
    end
  endtask

  task automatic model_step();
    int nit [2][N];
    for (int g = 0; g < 2; g++) begin
      for (int i = 0; i < N; i++) begin
        int s = int'(h[i]) + it[g][i];
        int lim = int'(i0);
        for (int b = 0; b < N; b++)
          if (W[g][i][b] != 0) s += mm[g][b] ? W[g][i][b] : -W[g][i][b];
        s += r[i] ? int'(nrnd) : -int'(nrnd);
        if (s >= lim) s = lim - 1;
        else if (s < -lim) s = -lim;
        nit[g][i] = s;
      end
      for (int i = 0; i < N; i++) begin
        mm[g][i] = (it[g][i] >= 0);
        it[g][i] = nit[g][i];
      end
    end
  endtask

  initial begin
    for (int g = 0; g < 2; g++) for (int i = 0; i < N; i++) begin it[g][i] = 0; mm[g][i] = 1; end
    load_weights();
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      if (n % 1000 == 999) load_weights();
      i0   = i0_t'(1 << $urandom_range(5, 0));
      nrnd = nrnd_t'($urandom_range(3, 0));
      r    = {$urandom, $urandom};
      en   = ($urandom_range(9, 0) != 0);
      clr  = ($urandom_range(499, 0) == 0);
      if (clr) begin
        for (int g = 0; g < 2; g++) for (int i = 0; i < N; i++) begin it[g][i] = 0; mm[g][i] = 1; end
      end else if (en) model_step();
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) begin
        checks += 2;
        if (m4[i] != mm[0][i]) begin failures++; if (failures < 10) $display("n=%0d torus spin %0d", n, i); end
        if (m8[i] != mm[1][i]) begin failures++; if (failures < 10) $display("n=%0d king spin %0d", n, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
