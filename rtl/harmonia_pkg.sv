// harmonia_pkg -- shared constants and bus types of the Harmonia accelerator.
//
// Numbers that come from the paper: BFP group size 32, 5-bit shared exponent,
// 8-bit activation mantissa (4-bit for the compressed KV cache), an 8 x 16 PE
// array, 32 lanes per sub-PE, and the 256b + 74b word that the activation and
// weight/KV buses carry per row or column.  The bit layout of that word is this
// design's choice:
//   [255:0]   64 four-bit values (mantissa nibbles, KV magnitudes or INT4 weights)
//   [319:256] 64 sign bits          (M8W4: [271:256] holds the FP16 group scale)
//   [329:320] two 5-bit shared exponents, one per 32-element group
package harmonia_pkg;

  localparam int unsigned GS        = 32;   // BFP group size
  localparam int unsigned EXP_W     = 5;    // shared exponent width
  localparam int unsigned MAN_W     = 8;    // activation mantissa width
  localparam int unsigned BEAT_ELEM = 64;   // elements per bus word (two groups)
  localparam int unsigned WORD_W    = 330;  // 256b + 74b
  localparam int unsigned PE_ROWS   = 8;
  localparam int unsigned PE_COLS   = 16;

  // Compute modes of the reconfigurable PE (Sec. IV-B).
  typedef enum logic [1:0] {
    M8W4 = 2'd0,   // 8-bit-mantissa activation x INT4 weight (linear layers)
    M8M4 = 2'd1,   // 8-bit x 4-bit mantissa (attention, compressed KV)
    M8M8 = 2'd2    // 8-bit x 8-bit mantissa, split into two nibble passes
  } mode_e;

  // One activation beat travelling along a PE row: one nibble plane of 64
  // activations (two BFP groups) plus its control tags.
  typedef struct packed {
    logic                            valid;
    logic                            hi;     // 1: high nibble plane, 0: low
    logic                            first;  // first K step of an output
    logic                            last;   // last K step of an output
    logic [1:0][EXP_W-1:0]           exp;
    logic [BEAT_ELEM-1:0]            sign;
    logic [BEAT_ELEM-1:0][3:0]       mag;
  } act_beat_t;

  // Weight/KV word on one column bus; sel picks wrapper 0 or wrapper 1.
  typedef struct packed {
    logic              valid;
    logic              sel;
    logic [WORD_W-1:0] word;
  } wbus_t;

  // Commands of the flexible data generation flow (FDGF) controller.
  typedef enum logic [1:0] {
    CMD_LOAD_W  = 2'd0,
    CMD_LOAD_A  = 2'd1,
    CMD_COMPUTE = 2'd2
  } fdgf_op_e;

  // Tensor fetcher operations.
  typedef enum logic [1:0] {
    TF_LOAD_W = 2'd0,
    TF_LOAD_A = 2'd1,
    TF_STORE  = 2'd2
  } tf_op_e;

endpackage
