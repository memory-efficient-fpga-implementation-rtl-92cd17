// tb_result_fifo: self-checking test of the result FIFO.
//
// Small instance (16 bits x 8 entries). Random pushes and pops, legal only
// (no push when full, no pop when empty), are checked against a queue:
// the popped word must appear on dout with dout_valid exactly one clock
// after rd, and full, empty and count must match the queue length after
// every clock. Bursts drive the FIFO to full and back to empty, and the
// test counts that both happened.
module tb_result_fifo;
  localparam int unsigned WIDTH = 16;
  localparam int unsigned DEPTH = 8;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic wr = 1'b0, rd = 1'b0;
  logic [WIDTH-1:0] din = '0;
  logic [WIDTH-1:0] dout;
  logic dout_valid, full, empty;
  logic [AW:0] count;

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] q [$];
  logic [WIDTH-1:0] exp_word;
  bit exp_valid;
  int n_full = 0, n_empty = 0;

  result_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    exp_valid = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 20000; n++) begin
      int phase;
      bit w, r;
      @(negedge clk);
      // check state left by the previous edge
      checks++;
      if (dout_valid !== exp_valid || (exp_valid && dout !== exp_word)) begin
        failures++;
        if (failures < 10) $display("read mismatch n=%0d valid=%0b dout=%h exp=%h", n, dout_valid, dout, exp_word);
      end
      checks++;
      if (int'(count) != q.size() || full !== (q.size() == DEPTH) || empty !== (q.size() == 0)) begin
        failures++;
        if (failures < 10) $display("flag mismatch n=%0d count=%0d exp=%0d", n, count, q.size());
      end
      if (full) n_full++;
      if (empty) n_empty++;
      phase = (n / 64) % 3;   // 0: fill-biased, 1: drain-biased, 2: balanced
      w = (phase == 0) ? ($urandom_range(9, 0) < 8) : (phase == 1) ? ($urandom_range(9, 0) < 2) : 1'($urandom);
      r = (phase == 0) ? ($urandom_range(9, 0) < 2) : (phase == 1) ? ($urandom_range(9, 0) < 8) : 1'($urandom);
      if (q.size() == DEPTH) w = 0;
      if (q.size() == 0) r = 0;
      wr = w; rd = r; din = WIDTH'($urandom);
      exp_valid = r;
      if (r) exp_word = q.pop_front();
      if (w) q.push_back(din);
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin
      failures++;
      $display("full seen %0d times, empty seen %0d times", n_full, n_empty);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
