// tb_spin_gate: self-checking test of one spin-gate with 4 neighbours.
//
// Drives random biases, weights, neighbour spins, noise bits, noise
// magnitudes and temperatures (I0 1..64), with random enable and clear, and
// compares the Itanh and spin registers every cycle with an integer model of
// the update rule: I = h + sum(+-J) + (+-nrnd) + Itanh, saturated to
// [-I0, I0-1]; the spin register takes the sign of the previous Itanh.
// Also checks that a large positive drive pins Itanh at I0-1 and a large
// negative one at -I0 (both saturation limits are reached).
module tb_spin_gate;
  import hassa_pkg::*;

  localparam int unsigned DEG = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic en, clr, r;
  i0_t i0;
  nrnd_t nrnd;
  weight_t h;
  weight_t j [DEG];
  logic [DEG-1:0] m_nbr;
  logic signed [ST_W-1:0] itanh;
  logic m;

  int checks = 0, failures = 0;
  int ref_it;
  bit ref_m;
  int hit_hi = 0, hit_lo = 0;

  spin_gate #(.DEG(DEG)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int model_next(int it);
    int s, lim;
    s = int'(h) + it;
    for (int k = 0; k < DEG; k++) s += m_nbr[k] ? int'(j[k]) : -int'(j[k]);
    s += r ? int'(nrnd) : -int'(nrnd);
    lim = int'(i0);
    if (s >= lim) return lim - 1;
    if (s < -lim) return -lim;
    return s;
  endfunction

  task automatic randomize_inputs(int mode);
    i0   = i0_t'($urandom_range(64, 1));
    nrnd = nrnd_t'($urandom_range(15, 0));
    r    = 1'($urandom);
    for (int k = 0; k < DEG; k++) j[k] = weight_t'($urandom_range(15, 0));
    h     = weight_t'($urandom_range(15, 0));
    m_nbr = DEG'($urandom);
    if (mode == 1) begin  // strong positive drive
      h = 4'sd7; for (int k = 0; k < DEG; k++) j[k] = 4'sd7;
      m_nbr = '1; r = 1'b1; nrnd = 4'd15;
    end else if (mode == 2) begin  // strong negative drive
      h = -4'sd8; for (int k = 0; k < DEG; k++) j[k] = 4'sd7;
      m_nbr = '0; r = 1'b0; nrnd = 4'd15;
    end
  endtask

  initial begin
    en = 0; clr = 0; r = 0; i0 = 1; nrnd = 0; h = 0; m_nbr = 0;
    for (int k = 0; k < DEG; k++) j[k] = 0;
    ref_it = 0; ref_m = 1'b1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 20000; n++) begin
      int mode;
      int nxt;
      bit nm;
      @(negedge clk);
      mode = (n % 1000 < 40) ? 1 : (n % 1000 < 80) ? 2 : 0;
      randomize_inputs(mode);
      en  = ($urandom_range(9, 0) != 0);
      clr = ($urandom_range(199, 0) == 0);
      nxt = model_next(ref_it);
      if (clr) begin
        ref_it = 0; ref_m = 1'b1;
      end else if (en) begin
        nm = (ref_it >= 0);
        ref_it = nxt;
        ref_m = nm;
      end
      @(posedge clk);
      #1;
      checks++;
      if (int'(itanh) != ref_it || m != ref_m) begin
        failures++;
        if (failures < 10)
          $display("mismatch n=%0d itanh=%0d exp=%0d m=%0b exp=%0b", n, itanh, ref_it, m, ref_m);
      end
      if (!clr && en && mode == 1 && ref_it == int'(i0) - 1) hit_hi++;
      if (!clr && en && mode == 2 && ref_it == -int'(i0)) hit_lo++;
    end
    checks++;
    if (hit_hi == 0 || hit_lo == 0) begin
      failures++;
      $display("saturation not reached: hi=%0d lo=%0d", hit_hi, hit_lo);
    end
    $display("saturations: upper=%0d lower=%0d", hit_hi, hit_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
