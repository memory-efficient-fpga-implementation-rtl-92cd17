// tb_xorshift_rng: self-checking test of the noise-bit generator.
//
// Uses a 100-bit generator (four 32-bit lanes, the last one truncated) and
// steps it with a random enable. A reference written here, from the
// published xorshift32 recurrence x ^= x<<13; x ^= x>>17; x ^= x<<5 and the
// lane seeding rule, predicts every output word. Also checks that the bits
// are balanced (between 45 % and 55 % ones) and that the output holds while
// the enable is low.
module tb_xorshift_rng;
  localparam int unsigned WIDTH = 100;
  localparam int unsigned LANES = 4;
  localparam logic [31:0] SEED  = 32'h1234_5678;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic en = 1'b0;
  logic [WIDTH-1:0] r;

  int checks = 0, failures = 0;
  logic [31:0] ref_st [LANES];
  longint ones = 0, bits = 0;

  xorshift_rng #(.WIDTH(WIDTH), .SEED(SEED)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WIDTH-1:0] ref_out();
    logic [LANES*32-1:0] f;
    for (int l = 0; l < LANES; l++) f[l*32 +: 32] = ref_st[l];
    return f[WIDTH-1:0];
  endfunction

  initial begin
    for (int l = 0; l < LANES; l++) begin
      ref_st[l] = SEED + 32'(l) * 32'h9E37_79B9;
      if (ref_st[l] == 0) ref_st[l] = 1;
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      checks++;
      if (r !== ref_out()) begin
        failures++;
        if (failures < 10) $display("mismatch at %0d: %h vs %h", n, r, ref_out());
      end
      ones += $countones(r); bits += WIDTH;
      en = ($urandom_range(3, 0) != 0);
      if (en)
        for (int l = 0; l < LANES; l++) begin
          ref_st[l] ^= ref_st[l] << 13;
          ref_st[l] ^= ref_st[l] >> 17;
          ref_st[l] ^= ref_st[l] << 5;
        end
    end
    checks++;
    if (ones * 100 < bits * 45 || ones * 100 > bits * 55) begin
      failures++;
      $display("unbalanced: %0d ones of %0d", ones, bits);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
