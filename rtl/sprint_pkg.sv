// sprint_pkg: constants and types shared by the sparse-attention accelerator.
//
// The sizes follow the small (single-CORELET, 16 KB) configuration: embedding
// size 64 with 8-bit elements, 4-bit MSB nibbles kept in the transposable
// ReRAM, 16 memory channels of 64 bits, 128-entry key/value buffers and a
// pruning vector of up to 4096 tokens (one bit per token in a 0.5 KB index
// buffer). The memory timing numbers (tRCD, tCL) and the command encoding are
// this design's own choices; tAxTh is set just below the 8 cycles quoted for
// in-memory thresholding.
package sprint_pkg;

  localparam int unsigned D          = 64;    // embedding size
  localparam int unsigned EW         = 8;     // element width
  localparam int unsigned NW         = 4;     // nibble width (MSB / LSB part)
  localparam int unsigned SEQ_MAX    = 4096;  // longest sequence
  localparam int unsigned TOK_W      = $clog2(SEQ_MAX);
  localparam int unsigned LEN_W      = TOK_W + 1;
  localparam int unsigned KV_ENTRIES = 128;   // key/value buffer entries
  localparam int unsigned SLOT_W     = $clog2(KV_ENTRIES);
  localparam int unsigned NCH        = 16;    // memory channels
  localparam int unsigned CH_W       = 64;    // channel data width
  localparam int unsigned T_AXTH     = 7;     // in-memory thresholding time
  localparam int unsigned T_RCD      = 10;    // row activate to read
  localparam int unsigned T_CL       = 10;    // read to data

  localparam int unsigned VEC_W  = D * EW;    // 512-bit q / k / v vector
  localparam int unsigned NIB_W  = D * NW;    // 256-bit nibble vector
  localparam int unsigned SCORE_W = 12;       // softmax input
  localparam int unsigned PROB_W  = 8;        // softmax output
  localparam int unsigned OUT_W   = 16;       // attention output element

  // Commands understood by the transposable ReRAM.
  typedef enum logic [1:0] {
    CMD_NOP   = 2'd0,
    CMD_COPYQ = 2'd1,   // copy 16 query MSB nibbles into the in-memory query buffer
    CMD_READP = 2'd2,   // read 64 bits of the binary pruning vector
    CMD_TREAD = 2'd3    // transposed read of one key column (64 MSB nibbles)
  } mem_cmd_e;

  // One fetched key/value pair on its way to the CORELET.
  typedef struct packed {
    logic [TOK_W-1:0] tok;
    logic [NIB_W-1:0] k_msb;
    logic [NIB_W-1:0] k_lsb;
    logic [VEC_W-1:0] v;
  } fill_t;

endpackage
