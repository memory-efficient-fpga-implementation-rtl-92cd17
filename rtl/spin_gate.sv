// spin_gate: one probabilistic bit (p-bit) of the stochastic simulated
// annealing array.
//
// Each enabled cycle the gate computes
//     I = h + sum_k (m_k ? +J_k : -J_k) + (r ? +nrnd : -nrnd) + Itanh
// where Itanh is its own registered state, then saturates I to the range
// [-I0, I0-1] (the Itanh finite-state machine, built as a saturating
// up/down counter: I >= I0 gives I0-1, I < -I0 gives -I0, otherwise I) and
// stores the result back into the Itanh register. The spin output is a
// second register holding sgn(Itanh): 1 (spin +1) when the registered Itanh
// is >= 0, else 0 (spin -1). Spins and the noise bit use the bit-stream
// convention 1 = +1, 0 = -1.
//
// Timing: both registers advance only when en is high, so the array can be
// stalled without losing a step. m lags the Itanh register by one enabled
// cycle, as in the published block diagram (a register after the counter
// and another after the sign). The published equations alone would let the
// neighbours see sgn of the current Itanh; the circuit, with its extra
// register, is what is built here. clr (synchronous, above en) sets Itanh
// to 0 and m to 1, which is sgn(0).
//
// Follows the published equations and block diagram: the per-neighbour
// two-input multiplexer choosing +J or -J, one adder, the counter bounded by
// [-I0, I0-1], the two registers. The diagram labels the multiplexer input 0
// with J and input 1 with -J under select m_j; the update equation adds
// J_ij * m_j, with m_j = +1 encoded as 1. This gate follows the equation
// (m_j = 1 selects +J). Register widths and the clear behaviour are this
// design's own choice.
module spin_gate
  import hassa_pkg::*;
#(
  parameter int unsigned DEG = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 clr,
  input  i0_t                  i0,
  input  nrnd_t                nrnd,
  input  logic                 r,
  input  weight_t              h,
  input  weight_t              j     [DEG],
  input  logic [DEG-1:0]       m_nbr,
  output logic signed [ST_W-1:0] itanh,
  output logic                 m
);

  logic signed [ST_W-1:0] sum;
  logic signed [ST_W-1:0] i0_s;
  logic signed [ST_W-1:0] nxt;
  logic signed [ST_W-1:0] noise;

  assign noise = ST_W'($signed({1'b0, nrnd}));

  always_comb begin
    sum = ST_W'(h) + itanh;
    for (int unsigned k = 0; k < DEG; k++) begin
      if (m_nbr[k]) sum = sum + ST_W'(j[k]);
      else          sum = sum - ST_W'(j[k]);
    end
    if (r) sum = sum + noise;
    else   sum = sum - noise;
  end

  // Saturating counter bounds [-I0, I0-1].
  always_comb begin
    i0_s = $signed(ST_W'(i0));
    if (sum >= i0_s)       nxt = i0_s - $signed(ST_W'(1));
    else if (sum < -i0_s)  nxt = -i0_s;
    else                   nxt = sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      itanh <= '0;
      m     <= 1'b1;
    end else if (clr) begin
      itanh <= '0;
      m     <= 1'b1;
    end else if (en) begin
      itanh <= nxt;
      m     <= ~itanh[ST_W-1];
    end
  end

endmodule
