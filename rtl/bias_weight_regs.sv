// bias_weight_regs: the bias (h_i) and weight (J_ij) registers of the Ising
// model, loaded by the host and read in parallel by the spin-gate array.
//
// One 4-bit signed register per spin and one per edge (N + E registers,
// 800 + 1,600 for the 4-neighbour graph). Loading is a simple write port:
// addresses 0..N-1 select h[addr], addresses N..N+E-1 select j[addr-N];
// writes to higher addresses are ignored. A write takes effect on the next
// clock. Reset (asynchronous, active low) clears every register to 0.
//
// The published design keeps h and J in registers in the top module; the
// write port and address map are this design's choice (the host link that
// would drive it is not specified beyond being a UART).
module bias_weight_regs
  import hassa_pkg::*;
#(
  parameter int unsigned N      = N_SPINS_DEF,
  parameter int unsigned E      = N_SPINS_DEF * 2,
  localparam int unsigned ADDR_W = $clog2(N + E)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  weight_t           wdata,
  output weight_t           h [N],
  output weight_t           j [E]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N; i++) h[i] <= '0;
      for (int unsigned e = 0; e < E; e++) j[e] <= '0;
    end else if (we) begin
      if (int'(addr) < int'(N))
        h[int'(addr)] <= wdata;
      else if (int'(addr) < int'(N + E))
        j[int'(addr) - int'(N)] <= wdata;
    end
  end

endmodule
