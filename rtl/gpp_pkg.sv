// gpp_pkg: shared constants and types of the generalized ping-pong PIM accelerator.
//
// The macro geometry (32x32 bytes), the operation unit (4x8 bytes), the write
// speed range (1..8 bytes/cycle, 4 used as default), 16 cores of 16 macros and
// the bandwidth range (8..256 bytes/cycle) follow the paper's evaluation setup.
// The instruction encodings (tile_instr_t, core_task_t), the field widths and
// the int8 x int8 -> int32 arithmetic are this design's own choices: the paper
// names its instruction set but does not publish the encoding.
// The constants are the defaults of the modules' parameters; a lint run on
// a module that overrides or does not need some of them reports those as
// unused (UNUSEDPARAM).
package gpp_pkg;

  // Macro and datapath geometry
  parameter int unsigned MACRO_ROWS = 32;   // input words per vector (bytes)
  parameter int unsigned MACRO_COLS = 32;   // output columns
  parameter int unsigned OU_ROWS    = 4;    // operation unit rows
  parameter int unsigned OU_COLS    = 8;    // operation unit columns
  parameter int unsigned WRITE_SPEED = 4;   // s, bytes written per cycle
  parameter int unsigned ACC_W      = 32;   // accumulator width
  parameter int unsigned N_CORES_D  = 16;
  parameter int unsigned N_MACROS_D = 16;
  parameter int unsigned BAND_MAX   = 256;  // largest off-chip band (bytes/cycle)

  // Scheduling strategy of a core's macros
  typedef enum logic [1:0] {
    STRAT_IN_SITU = 2'd0,   // all macros write together, then all compute
    STRAT_NAIVE   = 2'd1,   // two banks alternate write / compute
    STRAT_GPP     = 2'd2    // at most write_slots macros write, others compute
  } strategy_e;

  // State of one macro lane, as seen by the generalized execution unit
  typedef enum logic [2:0] {
    LANE_IDLE  = 3'd0,      // no task
    LANE_WREQ  = 3'd1,      // task taken, waiting for write permission
    LANE_WRITE = 3'd2,      // streaming weights into the macro
    LANE_CREQ  = 3'd3,      // weights loaded, waiting for compute permission
    LANE_COMP  = 3'd4       // computing input vectors
  } lane_state_e;

  // Activation selected in the special function unit
  typedef enum logic [1:0] {
    ACT_NONE    = 2'd0,
    ACT_RELU    = 2'd1,
    ACT_SIGMOID = 2'd2
  } act_e;

  // One weight-tile task of a core: load a 32x32 tile, then multiply n_in
  // input vectors with it and accumulate into n_in result lines.
  typedef struct packed {
    logic [19:0] w_line;     // first weight-memory line of the tile
    logic [11:0] in_line;    // first input-buffer line (one line = one vector)
    logic [11:0] out_line;   // first result-buffer line
    logic [7:0]  n_in;       // number of input vectors (1..255)
  } core_task_t;

  typedef enum logic [1:0] {
    OP_END  = 2'd0,
    OP_GEMM = 2'd1
  } tile_op_e;

  // Tile-level instruction: one GeMM Y = act(X * W + b).
  // X is n_in x (32*k_tiles), W is (32*k_tiles) x (32*n_tiles).
  typedef struct packed {
    tile_op_e    op;
    strategy_e   strat;
    act_e        act;
    logic        bias_en;
    logic [7:0]  active_macros;  // macros used per core (1..N_MACROS)
    logic [7:0]  write_slots;    // concurrent writers per core (GPP)
    logic [7:0]  n_in;
    logic [7:0]  k_tiles;
    logic [7:0]  n_tiles;
    logic [19:0] w_base;         // weight-memory line of tile 0
    logic [11:0] in_base;        // input-memory line of X row 0, k-tile 0
    logic [11:0] out_base;       // result-memory line of Y row 0, n-tile 0
  } tile_instr_t;

endpackage
