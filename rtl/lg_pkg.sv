// lg_pkg: constants and types shared by the LearningGroup sparse-training
// accelerator.
//
// The architecture numbers follow the published configuration: three cores,
// 264 vector processing units per core, grouping up to G = 16, and bitvectors
// of 512 bits (layers up to 512 channels).  Widths of indexes, workloads and
// addresses are derived from those numbers.  The memory sizes (global
// parameter memory, per-core weight memory) and the layout of the grouping
// matrices inside the parameter memory are this design's own choices.
package lg_pkg;

  // ---- architecture configuration -------------------------------------
  parameter int unsigned NUM_CORES = 3;     // C
  parameter int unsigned NUM_VPU   = 264;   // N, VPUs per core
  parameter int unsigned G_MAX     = 16;    // largest group number supported
  parameter int unsigned CH_MAX    = 512;   // largest channel count (bitvector width)

  // ---- derived widths ---------------------------------------------------
  parameter int unsigned GW   = $clog2(G_MAX);        // group (max index) width: 4 bits
  parameter int unsigned CHW  = $clog2(CH_MAX);       // channel index width: 9 bits
  parameter int unsigned WLW  = $clog2(CH_MAX + 1);   // workload width: 10 bits (0..512)
  parameter int unsigned GCW  = $clog2(G_MAX + 1);    // group count width (1..16)

  // ---- memories -----------------------------------------------------------
  // Global parameter memory: weights of one 512x512 layer at most, followed
  // by the input grouping matrix (M x G) and the output grouping matrix
  // (G x N) of that layer.
  parameter int unsigned GPM_DEPTH = 1 << 19;
  parameter int unsigned GPM_AW    = $clog2(GPM_DEPTH);
  parameter int unsigned IG_BASE   = CH_MAX * CH_MAX;
  parameter int unsigned OG_BASE   = IG_BASE + CH_MAX * G_MAX;

  // Per-core compressed weight memory: one core's share of a dense layer.
  parameter int unsigned WMEM_DEPTH = (CH_MAX * CH_MAX + NUM_CORES - 1) / NUM_CORES;
  // Per-core row memories (index list, activation): one core's rows.
  parameter int unsigned ROWS_PER_CORE_MAX = (CH_MAX + NUM_CORES - 1) / NUM_CORES;

  typedef logic [15:0] fp16_t;

  // Matrix orientation used by the encoder, load allocation unit and
  // aggregator: forward uses W (rows = input channels), backward uses W^T.
  typedef enum logic {
    MODE_FWD = 1'b0,
    MODE_BWD = 1'b1
  } mode_e;

  // Write port from the load allocation unit into the cores.
  typedef enum logic [2:0] {
    CW_NONE  = 3'd0,
    CW_WL    = 3'd1,   // workload table entry (addr = group)
    CW_IDX   = 3'd2,   // local index list entry (addr = local row)
    CW_ACT   = 3'd3,   // activation of a local row
    CW_W     = 3'd4,   // compressed weight (addr = flat weight position)
    CW_NROWS = 3'd5    // number of local rows (data)
  } core_wr_kind_e;

  typedef struct packed {
    core_wr_kind_e kind;
    logic [1:0]    core;   // destination core
    logic [31:0]   addr;
    fp16_t         data;
  } core_wr_t;

  // One partial sum leaving a core's output buffer: which group's which
  // non-zero position it belongs to, and its value.
  typedef struct packed {
    logic [GW-1:0]  grp;
    logic [CHW-1:0] k;
    fp16_t          val;
  } psum_t;

endpackage
