// hassa_pkg: types, default sizes and graph-topology functions shared by the
// HA-SSA (hardware-aware stochastic simulated annealing) processor.
//
// Sizes that follow the published design: 800 spin-gates, 4-bit signed
// biases and weights (range -8..7), 4 neighbours per spin for the toroidal
// G-set graphs (8 for the King's-graph problem), and an 800-bit wide,
// 16,384-deep result FIFO. Widths of the hyperparameter fields and of the
// internal Itanh state are this design's own choice, sized with headroom
// above the published hyperparameters (I0max = 32, tau = 100, mshot = 150,
// trial = 100).
//
// Topology: the spins sit on a ROWS x COLS grid with wrap-around (a torus).
// Spin i is at row i / COLS, column i % COLS. Edge weights are stored once
// per edge: every spin "owns" the edges that point right and down (and, for
// the King's graph, down-right and down-left). That gives N*DEG/2 weight
// registers, i.e. 1,600 for the 4-neighbour and 3,200 for the 8-neighbour
// graph, as in the published implementation.
package hassa_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_SPINS_DEF    = 800;
  localparam int unsigned ROWS_DEF       = 20;
  localparam int unsigned COLS_DEF       = 40;
  localparam int unsigned W_BITS         = 4;   // h_i and J_ij width
  localparam int unsigned I0_W           = 8;   // pseudo-inverse temperature
  localparam int unsigned NRND_W         = 4;   // noise magnitude
  localparam int unsigned BETA_W         = 3;   // shift amount
  localparam int unsigned TAU_W          = 16;
  localparam int unsigned ITER_W         = 16;  // mshot
  localparam int unsigned TRIAL_W        = 16;
  localparam int unsigned ST_W           = 12;  // Itanh state / sum width
  localparam int unsigned FIFO_DEPTH_DEF = 16384;

  typedef logic signed [W_BITS-1:0] weight_t;
  typedef logic        [I0_W-1:0]   i0_t;
  typedef logic        [NRND_W-1:0] nrnd_t;

  // Graph families used by the evaluated problems.
  typedef enum logic [0:0] {
    TOPO_TORUS4 = 1'b0,   // 4 neighbours (G11, G12, G13)
    TOPO_KING8  = 1'b1    // 8 neighbours (King1)
  } topo_e;

  // Hyperparameters, as listed in the controller of the block diagram.
  typedef struct packed {
    logic [TRIAL_W-1:0] trials;   // trial
    logic [ITER_W-1:0]  mshot;    // iterations per trial
    logic [BETA_W-1:0]  beta;     // I0 <<= beta every tau cycles
    logic [TAU_W-1:0]   tau;      // cycles per temperature step
    i0_t                i0max;
    i0_t                i0min;
    nrnd_t              nrnd;
  } hyper_t;

  function automatic int unsigned topo_deg(topo_e t);
    return (t == TOPO_KING8) ? 8 : 4;
  endfunction

  // Edge registers owned per spin.
  function automatic int unsigned topo_own(topo_e t);
    return topo_deg(t) / 2;
  endfunction

  // Grid offsets of neighbour k. Directions 0..OWN-1 are the owned edges,
  // OWN..DEG-1 are their mirrors (k and k+OWN point in opposite directions).
  function automatic int topo_dr(topo_e t, int unsigned k);
    int dr [8] = '{0, 1, 1, 1, 0, -1, -1, -1};
    int dr4[4] = '{0, 1, 0, -1};
    return (t == TOPO_KING8) ? dr[k] : dr4[k];
  endfunction

  function automatic int topo_dc(topo_e t, int unsigned k);
    int dc [8] = '{1, 0, 1, -1, -1, 0, -1, 1};
    int dc4[4] = '{1, 0, -1, 0};
    return (t == TOPO_KING8) ? dc[k] : dc4[k];
  endfunction

  // Index of the k-th neighbour of spin i on a ROWS x COLS torus.
  function automatic int unsigned nbr_index(topo_e t, int unsigned rows,
                                             int unsigned cols,
                                             int unsigned i, int unsigned k);
    int r, c;
    r = (int'(i / cols) + topo_dr(t, k) + int'(rows)) % int'(rows);
    c = (int'(i % cols) + topo_dc(t, k) + int'(cols)) % int'(cols);
    return int'(r) * cols + int'(c);
  endfunction

  // Index of the weight register of the edge between spin i and its k-th
  // neighbour.
  function automatic int unsigned edge_index(topo_e t, int unsigned rows,
                                              int unsigned cols,
                                              int unsigned i, int unsigned k);
    int unsigned own;
    own = topo_own(t);
    if (k < own) return i * own + k;
    else         return nbr_index(t, rows, cols, i, k) * own + (k - own);
  endfunction

endpackage
