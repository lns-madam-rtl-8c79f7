// lns_pkg -- shared sizes, types and constant tables of the LNS processing element.
//
// Number format (multi-base LNS): a value is sign * 2^(e/GAMMA), with an 8-bit word made of one
// sign bit and a 7-bit unsigned exponent e. GAMMA, the base factor, is a power of two, so the low
// log2(GAMMA) bits of an exponent are the remainder and the high bits the quotient. The sizes
// below are the main configuration of the paper (vector size 32, 32 lanes, 8-bit operands,
// 8 remainder bins, 24-bit accumulation, 16-entry collector, 128 KB BufferA, 8 KB BufferB).
//
// Design choices that the paper leaves open and that are made here:
//   * exponent code 0 is reserved for the value zero (the paper's datapath has an "is zero"
//     test but does not say how zero is encoded); non-zero values use codes 1..127;
//   * the remainder constants 2^(r/GAMMA) are held with LUT_F = 8 fraction bits;
//   * the 24-bit partial sums saturate instead of wrapping.
package lns_pkg;

  // ---- sizes taken from the paper (Table "Microarchitectural details") ----
  localparam int unsigned VS       = 32;   // vector size: elements per dot product
  localparam int unsigned LANES    = 32;   // vector MAC units per PE
  localparam int unsigned W        = 8;    // operand width: 1 sign + (W-1) exponent bits
  localparam int unsigned GAMMA    = 8;    // base factor = number of remainder bins
  localparam int unsigned ACC_W    = 24;   // accumulation precision
  localparam int unsigned ENTRIES  = 16;   // collector entries = cycles one A word is reused
  localparam int unsigned A_BYTES  = 128 * 1024;
  localparam int unsigned B_BYTES  = 8 * 1024;

  // ---- derived sizes ----
  localparam int unsigned EXP_W    = W - 1;                    // exponent width
  localparam int unsigned A_DEPTH  = A_BYTES / (LANES * VS);   // one word feeds all lanes
  localparam int unsigned B_DEPTH  = B_BYTES / VS;             // one word is broadcast
  localparam int unsigned SEG_W    = VS * W;                   // one lane's operand vector

  // ---- choices of this implementation ----
  localparam int unsigned LUT_F    = 8;    // fraction bits of the remainder constants

  // Pass being computed (Table "Mapping of tensors to buffers").
  typedef enum logic [1:0] {
    PASS_FWD   = 2'd0,   // A = weights,            B = input activations
    PASS_BWD_I = 2'd1,   // A = weights,            B = output gradients
    PASS_BWD_W = 2'd2    // A = input activations,  B = output gradients
  } pass_e;

  // Configuration written through "Control In" for one output tile.
  typedef struct packed {
    pass_e        pass;      // which tensor the outputs are (only forward applies ReLU)
    logic         relu_en;   // apply ReLU in the PPU (meaningful in the forward pass)
    logic [7:0]   k_chunks;  // number of A words (reduction chunks of VS elements), >= 1
    logic [7:0]   a_base;    // first BufferA word
    logic [11:0]  b_base;    // first BufferB word; ENTRIES words are read per A word
    logic [9:0]   scale;     // output scale s = 2^(scale/GAMMA), in exponent units
  } pe_cfg_t;

  // 2^(r/g) with f fraction bits, rounded to nearest.
  function automatic int unsigned rem_const(int unsigned r, int unsigned g, int unsigned f);
    return int'($rtoi(2.0 ** (real'(r) / real'(g)) * (2.0 ** f) + 0.5));
  endfunction

  // Smallest integer m with m >= 2^((k + 0.5)/g) * 2^f: the rounding threshold between
  // remainder k and k+1 when a mantissa with f fraction bits is converted to a log exponent.
  function automatic longint unsigned log_threshold(int unsigned k, int unsigned g,
                                                    int unsigned f);
    real t;
    t = 2.0 ** ((real'(k) + 0.5) / real'(g)) * (2.0 ** f);
    return longint'($rtoi($ceil(t)));
  endfunction

endpackage
