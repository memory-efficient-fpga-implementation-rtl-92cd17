// tb_bias_weight_regs: self-checking test of the bias/weight register file.
//
// Small instance (N = 12 biases, E = 24 weights). Checks reset to zero,
// random writes across the whole address map (including addresses past the
// end, which must be ignored) against a shadow copy, and that a write shows
// on the outputs on the next clock and not before.
module tb_bias_weight_regs;
  import hassa_pkg::*;
  localparam int unsigned N = 12;
  localparam int unsigned E = 24;
  localparam int unsigned AW = $clog2(N + E);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic we = 1'b0;
  logic [AW-1:0] addr = '0;
  weight_t wdata = '0;
  weight_t h [N];
  weight_t j [E];

  int checks = 0, failures = 0;
  weight_t sh [N];
  weight_t sj [E];

  bias_weight_regs #(.N(N), .E(E)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (h[i] !== sh[i]) begin failures++; $display("%s h[%0d]=%0d exp %0d", what, i, h[i], sh[i]); end
    end
    for (int e = 0; e < E; e++) begin
      checks++;
      if (j[e] !== sj[e]) begin failures++; $display("%s j[%0d]=%0d exp %0d", what, e, j[e], sj[e]); end
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) sh[i] = '0;
    for (int e = 0; e < E; e++) sj[e] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    compare("reset");
    for (int n = 0; n < 2000; n++) begin
      int a;
      @(negedge clk);
      a = $urandom_range((1 << AW) - 1, 0);
      we = ($urandom_range(3, 0) != 0);
      addr = AW'(a);
      wdata = weight_t'($urandom);
      #1;
      compare("before edge");   // nothing changes before the clock
      if (we) begin
        if (a < N) sh[a] = wdata;
        else if (a < N + E) sj[a - N] = wdata;
      end
      @(posedge clk); #1;
      compare("after edge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
