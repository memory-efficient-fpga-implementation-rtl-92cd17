// hassa_top: the HA-SSA annealing processor.
//
// An array of N spin-gates (one p-bit per Ising spin) anneals the Ising
// model held in the bias/weight registers. Every clock cycle of a run each
// spin-gate adds its bias, its neighbours' signed weights, a random +/-n_rnd
// from the XOR-shift generator and its own saturated state, and emits a new
// spin. The controller raises the pseudo-inverse temperature I0 from I0min
// to I0max by shifts every tau cycles, repeats this mshot times per trial,
// and writes the spin vector into the result FIFO only while I0 = I0max;
// the host reads the stored vectors and picks the best one.
//
// Blocks and wiring follow the published block diagram: bias/weight
// registers -> spin-gate array; XOR-shift RNG -> r(t); controller -> n_rnd,
// I0, enable to the array and write/read to the FIFO; FIFO -> host.
//
// Host side, exposed as plain ports because the serial (UART) link of the
// published board is not specified:
//   cfg_we/cfg_addr/cfg_wdata  load h (addresses 0..N-1) and J (N..N+E-1)
//   hp, start                  hyperparameters and start pulse
//   busy, done, stall          run status (done is a one-cycle pulse)
//   res_req -> res_valid/res_data   read one stored spin vector, data on the
//                                   next clock; res_count is the fill level
//   spins                      the live spin vector of the array
// Defaults: 800 spins on a 20 x 40 torus with 4 neighbours (G11-class
// problems), 16,384-entry FIFO. TOPO = TOPO_KING8 gives the 8-neighbour
// King's-graph build with 3,200 weight registers.
module hassa_top
  import hassa_pkg::*;
#(
  parameter int unsigned ROWS       = ROWS_DEF,
  parameter int unsigned COLS       = COLS_DEF,
  parameter topo_e       TOPO       = TOPO_TORUS4,
  parameter int unsigned FIFO_DEPTH = FIFO_DEPTH_DEF,
  parameter logic [31:0] SEED       = 32'h2545_F491,
  localparam int unsigned N      = ROWS * COLS,
  localparam int unsigned E      = N * topo_deg(TOPO) / 2,
  localparam int unsigned ADDR_W = $clog2(N + E),
  localparam int unsigned FAW    = $clog2(FIFO_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // problem loading
  input  logic               cfg_we,
  input  logic [ADDR_W-1:0]  cfg_addr,
  input  weight_t            cfg_wdata,
  // run control
  input  hyper_t             hp,
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic               stall,
  output logic [ITER_W-1:0]  iter_idx,
  output logic [TRIAL_W-1:0] trial_idx,
  // results
  input  logic               res_req,
  output logic [N-1:0]       res_data,
  output logic               res_valid,
  output logic [FAW:0]       res_count,
  output logic [N-1:0]       spins
);

  weight_t      h [N];
  weight_t      j [E];
  logic [N-1:0] r;
  logic         en, clr;
  i0_t          i0;
  nrnd_t        nrnd;
  logic         fifo_wr, fifo_rd, fifo_full, fifo_empty;

  bias_weight_regs #(.N(N), .E(E)) u_regs (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (cfg_we),
    .addr  (cfg_addr),
    .wdata (cfg_wdata),
    .h     (h),
    .j     (j)
  );

  xorshift_rng #(.WIDTH(N), .SEED(SEED)) u_rng (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (en),
    .r     (r)
  );

  hassa_controller u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .hp_in      (hp),
    .fifo_full  (fifo_full),
    .fifo_empty (fifo_empty),
    .res_req    (res_req),
    .en         (en),
    .clr        (clr),
    .i0         (i0),
    .nrnd       (nrnd),
    .fifo_wr    (fifo_wr),
    .fifo_rd    (fifo_rd),
    .stall      (stall),
    .busy       (busy),
    .done       (done),
    .iter_idx   (iter_idx),
    .trial_idx  (trial_idx)
  );

  spin_gate_array #(.ROWS(ROWS), .COLS(COLS), .TOPO(TOPO)) u_array (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (en),
    .clr   (clr),
    .i0    (i0),
    .nrnd  (nrnd),
    .r     (r),
    .h     (h),
    .j     (j),
    .m     (spins)
  );

  result_fifo #(.WIDTH(N), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk        (clk),
    .rst_n      (rst_n),
    .wr         (fifo_wr),
    .din        (spins),
    .rd         (fifo_rd),
    .dout       (res_data),
    .dout_valid (res_valid),
    .full       (fifo_full),
    .empty      (fifo_empty),
    .count      (res_count)
  );

endmodule
