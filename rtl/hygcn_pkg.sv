// hygcn_pkg: types and constants shared by the HyGCN accelerator.
//
// Numbers follow the paper's configuration: 32 SIMD16 cores in the
// Aggregation Engine, 8 systolic modules of 4x128 PEs in the Combination
// Engine, 32-bit fixed-point data. The split of the 32 bits into integer and
// fraction (Q16.16), the 512-bit memory beat (one SIMD16 chunk) and the
// command encodings are this design's own choices.
package hygcn_pkg;

  // ---- data ----------------------------------------------------------------
  localparam int unsigned ELEM_W = 32;          // 32-bit fixed point (paper)
  localparam int unsigned FRAC_W = 16;          // Q16.16 (assumed)
  localparam int unsigned SIMD_W = 16;          // lanes per SIMD core (paper: SIMD16)
  localparam int unsigned BEAT_W = ELEM_W * SIMD_W;  // one memory beat = one chunk
  localparam int unsigned ACC_W  = 64;          // PE accumulator width (assumed)
  localparam int unsigned VID_W  = 32;          // vertex / edge index width

  typedef logic signed [ELEM_W-1:0] elem_t;
  typedef elem_t [SIMD_W-1:0]       chunk_t;    // 16 feature elements
  typedef logic signed [ACC_W-1:0]  acc_t;

  // ---- engine geometry (paper, Table "System configurations") --------------
  localparam int unsigned NCORES = 32;          // SIMD cores
  localparam int unsigned NMOD   = 8;           // systolic modules
  localparam int unsigned MROWS  = 4;           // rows per systolic module
  localparam int unsigned MCOLS  = 128;         // columns per module = output length

  // ---- modes ----------------------------------------------------------------
  typedef enum logic [1:0] {AGG_ADD = 2'd0, AGG_MAX = 2'd1, AGG_MIN = 2'd2} agg_op_e;
  typedef enum logic {PIPE_LATENCY = 1'b0, PIPE_ENERGY = 1'b1} pipe_mode_e;
  typedef enum logic [1:0] {SAMPLE_ALL = 2'd0, SAMPLE_UNIFORM = 2'd1,
                            SAMPLE_PREDEF = 2'd2} sample_mode_e;

  // ---- off-chip clients, highest priority first (paper Sec. 4.5.2) ---------
  localparam int unsigned NCLIENT    = 4;
  localparam int unsigned CL_EDGE    = 0;
  localparam int unsigned CL_INPUT   = 1;
  localparam int unsigned CL_WEIGHT  = 2;
  localparam int unsigned CL_OUTPUT  = 3;
  localparam int unsigned MADDR_W    = 32;      // beat address
  localparam int unsigned MLEN_W     = 24;      // burst length in beats

  // Predefined sampling: bit 31 of an edge word marks a pre-selected edge.
  localparam int unsigned PREDEF_BIT = 31;

  // Per-layer configuration registers of the accelerator.
  typedef struct packed {
    logic [VID_W-1:0]   nv;        // vertices in the graph
    logic [VID_W-1:0]   flen;      // input feature length (elements)
    logic [VID_W-1:0]   cpv;       // beats per input feature = ceil(flen/16)
    logic [VID_W-1:0]   iw;        // interval (shard) width, vertices
    logic [VID_W-1:0]   win_h;     // window (shard) height, vertices
    agg_op_e            op;
    sample_mode_e       s_mode;
    logic [15:0]        s_factor;  // sampling index interval
    logic [15:0]        s_max;     // sampled neighbours per vertex, 0 = all
    logic [15:0]        s_seed;
    pipe_mode_e         pipe;
    logic               relu;
    logic [MADDR_W-1:0] cp_base;   // CSC column pointers
    logic [MADDR_W-1:0] ri_base;   // CSC row indices (edge sources)
    logic [MADDR_W-1:0] x_base;    // input features X^(k-1)
    logic [MADDR_W-1:0] w_base;    // weights W^k then bias b^k
    logic [MADDR_W-1:0] out_base;  // output features X^k
  } layer_cfg_t;

  // Aggregate one element (the Aggregate function of the GCN models).
  function automatic elem_t agg_apply(agg_op_e op, elem_t a, elem_t b);
    unique case (op)
      AGG_MAX: return (a > b) ? a : b;
      AGG_MIN: return (a < b) ? a : b;
      default: return a + b;
    endcase
  endfunction

endpackage
