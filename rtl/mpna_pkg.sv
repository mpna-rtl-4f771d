// mpna_pkg: shared sizes, types and the layer descriptor of the MPNA accelerator.
//
// The array size (8x8 for both arrays), the 256-entry scratch-pad memories, the
// 8-bit operands and the buffer capacities (36 KB weights, 256 KB data) follow
// the published configuration. Partial-sum and accumulator widths, the word
// organisation of the buffers and the descriptor fields are this design's own
// choices. Everything here is constant; no timing.
package mpna_pkg;

  localparam int unsigned K         = 8;      // rows of each systolic array
  localparam int unsigned L         = 8;      // columns of each systolic array
  localparam int unsigned NCOL      = 2 * L;  // accumulation / pooling sub-units
  localparam int unsigned DATA_W    = 8;      // activation and weight width
  localparam int unsigned PSUM_W    = 24;     // psum leaving an array column
  localparam int unsigned ACC_W     = 32;     // accumulation SPM entry
  localparam int unsigned SPM_DEPTH = 256;
  localparam int unsigned SPM_AW    = $clog2(SPM_DEPTH);
  localparam int unsigned WB_DEPTH  = 576;    // 576 x 64 B = 36 KB
  localparam int unsigned WB_AW     = $clog2(WB_DEPTH);
  localparam int unsigned DB_DEPTH  = 32768;  // 32768 x 8 B = 256 KB
  localparam int unsigned DB_AW     = $clog2(DB_DEPTH);
  localparam int unsigned ALPHA_FRAC = 7;     // leaky slope is Q1.7

  typedef logic signed [DATA_W-1:0] act_t;
  typedef logic signed [PSUM_W-1:0] psum_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // activation selector of the activation unit
  typedef enum logic [1:0] {
    ACT_NONE  = 2'd0,
    ACT_RELU  = 2'd1,
    ACT_LEAKY = 2'd2
  } act_e;

  // sideband that travels through an array beside the data
  typedef struct packed {
    logic              valid;
    logic              first;   // write instead of accumulate
    logic [SPM_AW-1:0] addr;    // accumulation SPM entry
  } meta_t;

  // command of one pooling/activation sub-unit sample
  typedef struct packed {
    logic              fire;    // produce a result with this sample
    logic              pair;    // combine with the previous sample
    logic              use_spm; // combine with the stored partial pool
    act_e              act;
    logic [SPM_AW-1:0] addr;
  } pa_cmd_t;

  typedef enum logic { LAYER_CONV = 1'b0, LAYER_FC = 1'b1 } layer_e;

  // layer descriptor given to the control unit
  typedef struct packed {
    layer_e            kind;
    logic [DB_AW-1:0]  in_base;   // data buffer word of the first input
    logic [7:0]        h;         // CONV: input rows
    logic [7:0]        w;         // CONV: input columns
    logic [7:0]        cg;        // input channel groups of K (FC: input words)
    logic [3:0]        p;         // CONV: kernel rows
    logic [3:0]        q;         // CONV: kernel columns
    logic [8:0]        u;         // FC: neurons per column (1..256)
    logic [WB_AW-1:0]  w_base;    // weight buffer word of the first weights
    logic [DB_AW-1:0]  out_base;
    logic [7:0]        out_cg;    // channel groups of the output map (address stride)
    logic [7:0]        out_g;     // first output group written by this pass
    logic              accumulate;// keep the SPM contents (continue a sum)
    logic              finish;    // pool, activate and write back at the end
    logic              pool;      // 2x2 max pooling, stride 2
    act_e              act;
    act_t              alpha;     // leaky slope, Q1.7
    logic [4:0]        shift;     // requantisation shift
  } layer_desc_t;

endpackage
