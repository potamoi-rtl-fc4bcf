// potamoi_pkg: sizes, number formats and command types shared by the
// augmented NPU (Gathering Unit, buffers, systolic array, vector unit).
//
// Numbers that follow the paper: 32 MFT banks with 2 read ports each, MVoxels
// of 8x8x8 = 512 points, RIT buffers of 6 KB holding 128 entries of eight
// (vertex id, weight) pairs or 1536 Gaussian point ids, a 24x24 array of
// 16-bit MACs with 32-bit accumulators, a 96 KB weight buffer and a 1.5 MB
// double-buffered global feature buffer built from 32 KB blocks.
// This design's own choices: features and activations are signed Q3.12,
// trilinear weights are unsigned Q1.15, an RIT slot is {VID[31:0], W[15:0]},
// a feature vector row is 32 channels x 16 bit = 512 bits.
package potamoi_pkg;

  // ---------------- number formats ----------------
  localparam int unsigned FEAT_W = 16;   // feature / activation / weight width
  localparam int unsigned ACC_W  = 32;   // accumulator width
  localparam int unsigned FRAC   = 12;   // fractional bits of features (Q3.12)
  localparam int unsigned W_FRAC = 15;   // fractional bits of RIT weights (Q1.15)

  // ---------------- Gathering Unit ----------------
  localparam int unsigned B_BANKS   = 32;   // MFT banks = channels per segment
  localparam int unsigned M_PORTS   = 2;    // read ports per bank = samples in parallel
  localparam int unsigned MFT_DEPTH = 512;  // points per MVoxel (8x8x8)
  localparam int unsigned MFT_AW    = 9;
  localparam int unsigned ROW_W     = B_BANKS * FEAT_W;  // one feature vector, 512 bits

  localparam int unsigned RIT_ENTRIES   = 128;
  localparam int unsigned RIT_ROW_AW    = 7;
  localparam int unsigned RIT_WPE       = 6;    // 64-bit words per entry (0x000..0x006)
  localparam int unsigned RIT_WORD_W    = 64;
  localparam int unsigned RIT_AW        = 10;   // word address, 0..0x2FF
  localparam int unsigned RIT_ENTRY_W   = RIT_WPE * RIT_WORD_W;  // 384
  localparam int unsigned VERTS         = 8;    // vertices per voxel
  localparam int unsigned VID_W         = 32;
  localparam int unsigned SLOT_W        = VID_W + FEAT_W;        // 48
  localparam int unsigned PID_PER_ENTRY = RIT_ENTRY_W / VID_W;   // 12
  localparam int unsigned CNT_W         = 11;   // up to 1536 PIDs

  // ---------------- NPU ----------------
  localparam int unsigned SA_ROWS = 24;
  localparam int unsigned SA_COLS = 24;
  localparam int unsigned WB_W    = SA_COLS * FEAT_W;   // 384-bit weight row
  localparam int unsigned WB_AW   = 11;                 // 2048 rows = 96 KB
  localparam int unsigned GFB_AW  = 14;                 // row address within one half

  typedef enum logic [1:0] {
    VOP_NONE = 2'd0,
    VOP_RELU = 2'd1,
    VOP_EXP  = 2'd2
  } vop_e;

  typedef enum logic {
    REP_STRUCTURED   = 1'b0,   // 8 x (VID, W) per entry, trilinear interpolation
    REP_UNSTRUCTURED = 1'b1    // Gaussian point ids, reduction skipped
  } rep_e;

  // One gather job = one MVoxel (or one channel segment of it).
  typedef struct packed {
    rep_e                mode;
    logic [CNT_W-1:0]    count;     // ray samples (structured) or PIDs (unstructured)
    logic [VID_W-1:0]    base;      // id of the MVoxel's first vertex / point
    logic                out_half;  // global feature buffer half to write
    logic [GFB_AW-1:0]   out_base;  // row of the first result
    logic                keep_rit;  // reuse the current RIT (next channel segment)
  } gu_job_t;

  // One MLP layer tile on the systolic array. Inputs wider than 32 channels
  // are gathered as several channel segments (rows of 32 channels each);
  // such a layer is one command per segment, all but the last with hold,
  // all but the first with accumulate.
  typedef struct packed {
    logic                a_half;
    logic [GFB_AW-1:0]   a_base;    // first input row
    logic [4:0]          nrows;     // 1..24 ray samples
    logic [5:0]          k;         // 1..32 input channels
    logic [WB_AW-1:0]    w_base;    // first weight row
    logic                out_half;
    logic [GFB_AW-1:0]   out_base;
    logic [4:0]          shift;     // requantisation shift
    vop_e                op;
    logic                accumulate; // add to the accumulators of the previous command
    logic                hold;       // keep the sums in the array, no write-back
  } gemm_cmd_t;

endpackage
