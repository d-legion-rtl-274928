// dlegion_pkg: types and constants shared by the D-Legion accelerator.
//
// The architecture numbers (8 Legions, 8 cores per Legion, 16x16 PEs per core,
// four accumulators and four psum banks per Legion, 1024-bit Legion input)
// follow the published D-Legion description. Encodings of the precision mode and
// of LINK_ID, the flit layout and all field widths are choices of this design.
package dlegion_pkg;

  // Precision / computation mode of a workload.
  //   MODE_DENSE : activation-to-activation, 8b x 8b, one 32-bit result per column (R = 1)
  //   MODE_PROJ4 : projection, 8b x 4b, two interleaved weight tiles (R = 2)
  //   MODE_PROJ2 : projection, 8b x 2b, four interleaved weight tiles (R = 4)
  typedef enum logic [1:0] {
    MODE_DENSE = 2'd0,
    MODE_PROJ4 = 2'd1,
    MODE_PROJ2 = 2'd2
  } mode_e;

  // LINK_ID: selects what a shared core link carries.
  typedef enum logic [1:0] {
    LINK_WEIGHT = 2'd0,
    LINK_ACT    = 2'd1,
    LINK_PSUM   = 2'd2
  } link_e;

  // Width of one psum lane (one accumulator lane). Two lanes make a 32-bit psum.
  localparam int unsigned LANE_W = 16;
  // Width of one stored psum element in a bank row.
  localparam int unsigned ELEM_W = 32;
  // Workload dimension width (M, K, N up to 65535).
  localparam int unsigned DIM_W  = 16;
  // Number of accumulators / psum banks per Legion.
  localparam int unsigned NACC   = 4;

  // Workload handed to one Legion by the orchestrator.
  typedef struct packed {
    logic [DIM_W-1:0] m;
    logic [DIM_W-1:0] k;
    logic [DIM_W-1:0] n;
    mode_e            mode;
  } workload_t;

  // Attention stage handed to the orchestrator.
  typedef enum logic [2:0] {
    STG_Q_PROJ   = 3'd0,   // Q projection, one head per Legion (8b x 2b)
    STG_KV_PROJ  = 3'd1,   // K and V projections, one KV head per Legion (8b x 2b)
    STG_SCORE    = 3'd2,   // Q x K^T per head, N split over the Legions (8b x 8b)
    STG_ATT_HEAD = 3'd3,   // score x V per head, N split over the Legions (8b x 8b)
    STG_OUT_PROJ = 3'd4    // output projection, N split over the Legions (8b x 2b)
  } stage_e;

  // Attention-layer command: stage and model sizes.
  typedef struct packed {
    stage_e           stage;
    logic [DIM_W-1:0] seq;       // sequence length (rows M)
    logic [DIM_W-1:0] hidden;    // hidden size
    logic [DIM_W-1:0] head_dim;  // per-head dimension
    logic [DIM_W-1:0] heads;     // attention (query) heads
    logic [DIM_W-1:0] kv_heads;  // KV heads (= heads for MHA)
  } layer_cmd_t;

  // Acceleration ratio R of eq. (1) for a mode.
  function automatic int unsigned mode_ratio(mode_e md);
    case (md)
      MODE_PROJ2: return 4;
      MODE_PROJ4: return 2;
      default:    return 1;
    endcase
  endfunction

endpackage
