// csnn_pkg: types, sizes and small helper functions shared by the event-driven
// convolutional spiking neural network (CSNN) accelerator.
//
// Geometry. A feature map (fmap) of W x H binary neurons is cut into 3x3 tiles.
// A neuron at pixel (x, y) lives in tile (i, j) = (x/3, y/3) and in memory
// column s = 3*(y%3) + (x%3). Every memory that holds a per-pixel quantity (the
// membrane potentials, the address event queues) is split into NCOL = 9 column
// memories indexed by the tile address; any 3x3 window, wherever it is placed,
// then touches each column exactly once ("memory interlacing"). The column
// numbering (row-major inside a tile) is the one printed in the paper's
// interlacing figures; the (i, j) = (horizontal, vertical) order is the one
// printed there as well.
//
// Default sizes follow the evaluated network 28x28-32C3-32C3-P3-10C3-F10 with
// T = 5 time steps, 8-bit weights and potentials and x8 parallel units.
package csnn_pkg;

  // ---- sizes taken from the paper ---------------------------------------
  localparam int NCOL      = 9;   // 3x3 kernel -> 9 PEs / memory columns
  localparam int DATA_W    = 8;   // weight / potential width (8-bit variant)
  localparam int MAX_FMAP  = 28;  // largest fmap edge (MNIST input)
  localparam int T_STEPS   = 5;   // m-TTFS time steps per sample
  localparam int MAX_CH    = 32;  // largest channel count of a layer
  localparam int N_LAYERS  = 3;   // convolutional layers
  localparam int N_CLASSES = 10;  // F10 output layer
  localparam int N_UNITS   = 8;   // degree of parallelisation (x8)

  // ---- derived sizes -----------------------------------------------------
  localparam int TILE_MAX  = (MAX_FMAP + 2) / 3;          // 10 tiles per edge
  localparam int TA_W      = $clog2(TILE_MAX + 1);        // tile coordinate width
  localparam int MP_DEPTH  = TILE_MAX * TILE_MAX;         // words per MemPot column
  localparam int MP_AW     = $clog2(MP_DEPTH);
  localparam int PIX_W     = $clog2(MAX_FMAP + 1);        // pixel coordinate width
  localparam int CH_W      = $clog2(MAX_CH + 1);
  localparam int T_W       = $clog2(T_STEPS + 1);
  localparam int CPB       = (MAX_CH + N_UNITS - 1) / N_UNITS; // channels per unit
  // One queue per (layer parity, local channel, time step) in every AEQ bank.
  localparam int AEQ_QUEUES = 2 * CPB * T_STEPS;
  localparam int AEQ_QW     = $clog2(AEQ_QUEUES);
  localparam int AEQ_DEPTH  = AEQ_QUEUES * MP_DEPTH;      // entries per AEQ column
  localparam int AEQ_AW     = $clog2(AEQ_DEPTH);
  // Final fully connected layer: last conv fmap is ceil(28/3) = 10 pixels wide.
  localparam int FC_EDGE   = TILE_MAX;
  localparam int FC_IN     = 10 * FC_EDGE * FC_EDGE;      // 10 channels x 10 x 10
  localparam int FC_AW     = $clog2(FC_IN);
  localparam int SCORE_W   = 24;
  localparam int KROM_DEPTH = N_LAYERS * CPB * MAX_CH;    // kernels per unit
  localparam int KROM_AW    = $clog2(KROM_DEPTH);
  localparam int BROM_DEPTH = N_LAYERS * CPB;             // biases per unit
  localparam int BROM_AW    = $clog2(BROM_DEPTH);

  typedef logic signed [DATA_W-1:0] data_t;

  // Tile address (i, j) of an address event or of a MemPot word.
  typedef struct packed {
    logic [TA_W-1:0] i;
    logic [TA_W-1:0] j;
  } tile_addr_t;

  // One AEQ entry: address event plus the valid and end-of-queue flags.
  typedef struct packed {
    logic       valid;
    logic       eoq;
    tile_addr_t a;
  } aeq_entry_t;

  // One MemPot word: spike indicator bit stored next to the potential.
  typedef struct packed {
    logic  spk;
    data_t v;
  } mp_word_t;

  // Request of one client to one MemPot column (read and write port).
  typedef struct packed {
    tile_addr_t raddr;
    logic       we;
    tile_addr_t waddr;
    mp_word_t   wdata;
  } mp_req_t;

  // Nine kernel weights, index 3*row + col of the (already 180-degree
  // rotated) kernel as it is stored in the kernel ROM.
  typedef data_t [NCOL-1:0] kernel_t;

  // Per-layer configuration, written by the host before a run.
  typedef struct packed {
    logic [CH_W-1:0]  c_in;     // input channels
    logic [CH_W-1:0]  c_out;    // output channels
    logic [PIX_W-1:0] w;        // fmap width  (input = output of the conv)
    logic [PIX_W-1:0] h;        // fmap height
    logic             pool;     // 3x3 max-pooling after thresholding
    data_t            vt;       // firing threshold
  } layer_cfg_t;

  // Host write port into the kernel, bias and fully connected weight memories.
  typedef enum logic [1:0] {SEL_KERNEL = 2'd0, SEL_BIAS = 2'd1, SEL_FC = 2'd2} cfg_sel_e;

  typedef struct packed {
    logic                       we;
    cfg_sel_e                   sel;
    logic [$clog2(N_UNITS)-1:0] unit;   // kernel/bias: unit; FC: class (low bits)
    logic [3:0]                 cls;    // FC: class index
    logic [15:0]                addr;
    kernel_t                    data;   // kernel: all 9; bias/FC: data[0]
  } cfg_wr_t;

  // Activity counters of one run.
  typedef struct packed {
    logic [31:0] cycles;      // cycles from start to done
    logic [31:0] conv_events; // valid address events accepted by the conv units
    logic [31:0] empty_cols;  // empty queue columns read (wasted cycles)
    logic [31:0] stalls;      // S2-S3 hazard stalls
    logic [31:0] forwards;    // S2-S4 hazards resolved by forwarding (any PE)
    logic [31:0] oob;         // PE updates suppressed at the fmap border
    logic [31:0] sat;         // saturated additions (conv and bias)
    logic [31:0] spikes;      // address events written by the thresholding units
    logic [31:0] pooled;      // of which max-pooled events
  } stats_t;

  // ---- helpers -----------------------------------------------------------

  // Saturating signed addition: clamps to the representable range instead of
  // wrapping around.
  function automatic data_t sat_add(data_t a, data_t b);
    logic signed [DATA_W:0] s;
    s = {a[DATA_W-1], a} + {b[DATA_W-1], b};
    if (s[DATA_W] != s[DATA_W-1])
      return s[DATA_W] ? {1'b1, {(DATA_W-1){1'b0}}} : {1'b0, {(DATA_W-1){1'b1}}};
    return s[DATA_W-1:0];
  endfunction

  function automatic logic sat_hit(data_t a, data_t b);
    logic signed [DATA_W:0] s;
    s = {a[DATA_W-1], a} + {b[DATA_W-1], b};
    return s[DATA_W] != s[DATA_W-1];
  endfunction

  // Offset (-1, 0, +1) along one axis from an event whose in-tile position is
  // `p_in` (0..2) to the neighbour whose in-tile position is `p_m`.
  function automatic int signed nb_off(int p_m, int p_in);
    int d;
    d = p_m - p_in;
    if (d == 2)  return -1;
    if (d == -2) return 1;
    return d;
  endfunction

  // MemPot linear word address of a tile.
  function automatic logic [MP_AW-1:0] mp_lin(tile_addr_t a);
    return MP_AW'(a.j) * MP_AW'(TILE_MAX) + MP_AW'(a.i);
  endfunction

endpackage
