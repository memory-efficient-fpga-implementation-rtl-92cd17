// spin_gate_array: the Ising network of N = ROWS*COLS spin-gates.
//
// Every spin-gate is wired to the spins of its graph neighbours, with the
// weight register of each edge shared by the two spins it joins. The graph is
// fixed when the array is built (as in the published hardware, where the
// number of spin-gates and their connections follow the Ising model of the
// problem): a ROWS x COLS torus with 4 neighbours (TOPO_TORUS4, the G-set
// toroidal graphs G11..G13) or 8 neighbours (TOPO_KING8, the King's-graph
// problem). The neighbour and edge tables are computed at elaboration time
// by functions of hassa_pkg, so no table file is needed.
//
// Interface: h holds one bias per spin, j one weight per edge (edge numbering
// in hassa_pkg), r one noise bit per spin. en, clr, i0 and nrnd are broadcast
// to every gate. m is the spin vector, bit i = spin i (1 = +1).
// Timing: that of spin_gate; all gates step together on an enabled cycle and
// use each other's registered spins m(t).
//
// Grid shape 20 x 40 for 800 spins is this design's choice; the published
// text gives the spin count and neighbour counts, not the grid dimensions.
module spin_gate_array
  import hassa_pkg::*;
#(
  parameter int unsigned ROWS = ROWS_DEF,
  parameter int unsigned COLS = COLS_DEF,
  parameter topo_e       TOPO = TOPO_TORUS4,
  localparam int unsigned N   = ROWS * COLS,
  localparam int unsigned DEG = topo_deg(TOPO),
  localparam int unsigned E   = N * DEG / 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  logic            clr,
  input  i0_t             i0,
  input  nrnd_t           nrnd,
  input  logic [N-1:0]    r,
  input  weight_t         h [N],
  input  weight_t         j [E],
  output logic [N-1:0]    m
);

  for (genvar i = 0; i < N; i++) begin : g_spin
    weight_t        jw [DEG];
    logic [DEG-1:0] mn;
    logic signed [ST_W-1:0] itanh;

    for (genvar k = 0; k < DEG; k++) begin : g_nbr
      localparam int unsigned NB = nbr_index(TOPO, ROWS, COLS, i, k);
      localparam int unsigned ED = edge_index(TOPO, ROWS, COLS, i, k);
      assign jw[k] = j[ED];
      assign mn[k] = m[NB];
    end

    spin_gate #(.DEG(DEG)) u_gate (
      .clk   (clk),
      .rst_n (rst_n),
      .en    (en),
      .clr   (clr),
      .i0    (i0),
      .nrnd  (nrnd),
      .r     (r[i]),
      .h     (h[i]),
      .j     (jw),
      .m_nbr (mn),
      .itanh (itanh),
      .m     (m[i])
    );
  end

endmodule
