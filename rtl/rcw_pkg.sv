// rcw_pkg: sizes, modes and shared number-format helpers of the RCW-CIM accelerator.
//
// The geometry follows the published macro: 8 banks per macro, 32 sub-arrays per bank,
// 16 word lines per sub-array and 16-bit cells split into an upper ([15:8]) and a lower
// ([7:0]) byte. One word line therefore spans 8 x 32 = 256 input lanes. The input line
// is 2048 bits (256 INT8 activations), DRAM and on-chip network beats are 512 bits.
// The INT4 packing, the BF16 block-float convention and the fixed-point formats of the
// softmax/RMSNorm path are this design's own choices; they are described next to each
// helper below.
package rcw_pkg;

  localparam int BANKS      = 8;
  localparam int SUBARRAYS  = 32;
  localparam int ROWS       = 16;
  localparam int WORD_W     = 16;
  localparam int LANES      = BANKS * SUBARRAYS;   // 256 lanes per word line
  localparam int LINE_W     = LANES * 8;           // 2048-bit input line
  localparam int ROW_W      = LANES * WORD_W;      // 4096-bit word-line write
  localparam int BEAT_W     = 512;                 // DRAM / OCN beat
  localparam int BEATS_PER_ROW  = ROW_W / BEAT_W;  // 8
  localparam int BEATS_PER_LINE = LINE_W / BEAT_W; // 4
  localparam int COLS_MAX   = 4;                   // output columns per macro (INT4)
  localparam int SM_LANES_PER_BANK = 4;            // softmax lanes per bank
  localparam int SM_LANES   = BANKS * SM_LANES_PER_BANK; // 32 exponentials per cycle
  localparam int LUT_SEGS   = 64;                  // softmax LUT segments

  // Compute mode of a macro.
  typedef enum logic [1:0] {
    MODE_INT8    = 2'd0,  // INT8 x INT8, two output columns per word line
    MODE_INT4    = 2'd1,  // INT8 x INT4, four output columns per word line
    MODE_BF16    = 2'd2,  // BF16 x BF16, one output column, half-rate input line
    MODE_SOFTMAX = 2'd3   // fused softmax: LUT exponentials with partial/full accumulation
  } cim_mode_e;

  // One scheduler step, broadcast to every cluster. `ld*` loads an input line from the
  // input-reuse buffer into the line buffers (effective one cycle later); `rq*` issues a
  // macro access two cycles later, reading the RCW write data from the weight buffers one
  // cycle before. For INT modes a step loads row r and requests row r; for BF16 a row
  // takes two steps (half 0, then half 1 with the request).
  typedef struct packed {
    logic       ld;
    logic       ld_wide;
    logic       ld_half;
    logic [7:0] ld_line;
    logic       rq;
    logic       rq_compute;
    logic       rq_wr;
    logic [3:0] row;
    cim_mode_e  mode;
    logic [9:0] token;
    logic       first;      // first word line of a token pass: restart the row accumulator
    logic       last;       // last word line: send the token's result to the psum buffer
    logic       acc_add;    // psum buffer adds (later N blocks) instead of overwriting
  } step_t;

  typedef enum logic { OP_GEMM = 1'b0, OP_LOAD = 1'b1 } sched_op_e;

  // nonlinear fusion controller commands (one 32-value group each)
  typedef enum logic [1:0] {
    NL_SOFTMAX  = 2'd0,   // group softmax
    NL_RMS      = 2'd1,   // group RMSNorm; adds the group to the running global statistics
    NL_RMS_NEW  = 2'd2,   // as NL_RMS, first group of a new vector (restarts the statistics)
    NL_RMS_SYNC = 2'd3    // rescale a group with gamma and the global RMS of the vector
  } nl_op_e;
  typedef enum logic { DRAM_INPUT = 1'b0, DRAM_WEIGHT = 1'b1 } dram_kind_e;

  // DRAM read request of the scheduler. Inputs are addressed by (token, nb, beat), weights by
  // (block, cluster, core, row, beat); the memory controller maps them to addresses.
  typedef struct packed {
    dram_kind_e  kind;
    logic [15:0] blk;      // weight block index
    logic [2:0]  cluster;
    logic [1:0]  core;
    logic [3:0]  row;
    logic [9:0]  token;
    logic [3:0]  nb;       // N-block index of an input
    logic [6:0]  beat;     // 0..7 within a weight row, 0..127 within a token's input
  } dram_req_t;

  // Block-floating-point value used between the BF16 adder trees and the accumulator:
  // value = mant * 2^(exp - 268). exp is the sum of the two biased BF16 exponents
  // (2 x 127) plus the 14 fraction bits of the 8x8-bit significand product.
  typedef struct packed {
    logic [9:0]         exp;
    logic signed [39:0] mant;
  } bfp_t;

  localparam int BFP_BIAS = 268;

  // Convert a block-float value to BF16 (round toward zero, flush to zero on underflow,
  // saturate to the largest finite number on overflow).
  function automatic logic [15:0] bfp_to_bf16(input bfp_t v);
    logic        s;
    logic [39:0] mag;
    int          p;
    int          e;
    logic [39:0] norm;
    s   = v.mant[39];
    mag = s ? 40'(-v.mant) : 40'(v.mant);
    p   = -1;
    for (int i = 0; i < 40; i++) if (mag[i]) p = i;
    if (p < 0) return 16'h0000;
    e = int'(v.exp) + p - BFP_BIAS + 127;
    if (e <= 0)   return 16'h0000;
    if (e >= 255) return {s, 8'hFE, 7'h7F};
    norm = (p >= 7) ? (mag >> (p - 7)) : (mag << (7 - p));
    return {s, e[7:0], norm[6:0]};   // norm[7] is the hidden one
  endfunction

endpackage
