// xorshift_rng: WIDTH pseudo-random noise bits per annealing cycle, one for
// every spin-gate.
//
// The generator is built from ceil(WIDTH/32) independent 32-bit Marsaglia
// xorshift lanes (x ^= x << 13; x ^= x >> 17; x ^= x << 5). Lane l is seeded
// with SEED + l * 32'h9E3779B9, forced non-zero. The output r is the
// concatenation of the lane states, lane 0 in bits 31:0, truncated to WIDTH.
//
// Timing: r is the current state; each cycle with en high every lane steps
// once, so r changes on the next clock. Reset (asynchronous, active low)
// loads the seeds.
//
// The published design uses an XOR-shift generator whose output width equals
// the number of spin-gates; the lane structure, shift triple and seeding are
// this design's choice.
module xorshift_rng #(
  parameter int unsigned WIDTH = 800,
  parameter logic [31:0] SEED  = 32'h2545_F491,
  localparam int unsigned LANES = (WIDTH + 31) / 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  output logic [WIDTH-1:0] r
);

  logic [31:0] st [LANES];

  function automatic logic [31:0] xs32(logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  function automatic logic [31:0] lane_seed(int unsigned l);
    logic [31:0] s;
    s = SEED + 32'(l) * 32'h9E37_79B9;
    return (s == 32'h0) ? 32'h1 : s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned l = 0; l < LANES; l++) st[l] <= lane_seed(l);
    end else if (en) begin
      for (int unsigned l = 0; l < LANES; l++) st[l] <= xs32(st[l]);
    end
  end

  logic [LANES*32-1:0] flat;
  always_comb begin
    for (int unsigned l = 0; l < LANES; l++) flat[l*32 +: 32] = st[l];
  end
  assign r = flat[WIDTH-1:0];

endmodule
