// flexpe_pkg: types and constants shared by the Flex-PE datapath.
//
// A datapath word is 32 bits wide and is split into SIMD lanes by the
// precision setting: 8 lanes of 4 bits, 4 of 8, 2 of 16 or 1 of 32. The word
// is also seen as eight 4-bit segments, the granularity at which the carry
// chain of the add/sub unit and the lane masks of the shifter are built.
//
// Fixed-point formats (this design's choice; the paper gives no Q formats):
//   data format  (X, Y, e^x, sums, MAC operand and accumulator):
//                N-bit two's complement, N-3 fraction bits, range [-4, 4)
//   angle format (Z: hyperbolic angle, quotient, MAC weight):
//                N-bit two's complement, N-2 fraction bits, range [-2, 2)
// The 1/Kh start value and the atanh(2^-i) constants are kept in a 32-bit
// master form and rounded down to the lane width, so one table serves all
// four precisions.
//
// Lint note: ATANH_Q30 is read only by cordic_rom; a module that imports the
// package without instantiating cordic_rom reports it as unused.
package flexpe_pkg;

  localparam int unsigned WORD = 32;  // SIMD datapath width
  localparam int unsigned SEGS = 8;   // 4-bit segments per word

  typedef logic [WORD-1:0] word_t;

  // Precision select (the paper's precision_sel).
  typedef enum logic [1:0] {
    PREC4  = 2'd0,
    PREC8  = 2'd1,
    PREC16 = 2'd2,
    PREC32 = 2'd3
  } prec_e;

  // Activation select (the paper's sel_af[1:0]). The MSB separates Softmax
  // (FIFO numerator) from Sigmoid ("1" added to the denominator).
  typedef enum logic [1:0] {
    AF_RELU    = 2'd0,
    AF_SIGMOID = 2'd1,
    AF_TANH    = 2'd2,
    AF_SOFTMAX = 2'd3
  } af_e;

  // Operation select (the paper's ctrl_op).
  typedef enum logic {
    OP_AF  = 1'b0,
    OP_MAC = 1'b1
  } op_e;

  // CORDIC coordinate / mode of one stage.
  typedef enum logic [1:0] {
    CM_PASS    = 2'd0,  // registers only (stage unused by this operation)
    CM_HYP_ROT = 2'd1,  // hyperbolic rotation: cosh, sinh
    CM_LIN_ROT = 2'd2,  // linear rotation: y + x*z (MAC)
    CM_LIN_VEC = 2'd3   // linear vectoring: y/x (division)
  } cmode_e;

  // Per-operation configuration, carried with every token through the
  // pipeline so that precision and function can change from one word to the
  // next.
  typedef struct packed {
    prec_e       prec;
    op_e         op;
    af_e         af;
    logic        sm_phase;   // softmax pass: 0 accumulate, 1 divide
    logic        sm_first;   // first element of a softmax vector
    logic [4:0]  sm_shift;   // softmax scaling shift
    logic        rne;        // round-to-nearest-even in the shifters
  } pe_cfg_t;

  typedef struct packed {
    logic        valid;
    logic        drop;       // token produces no result (softmax pass 0)
    pe_cfg_t     cfg;
  } pe_tag_t;

  // Lane width in bits.
  function automatic int unsigned lane_bits(prec_e p);
    return 4 << p;
  endfunction

  // Number of 4-bit segments per lane.
  function automatic int unsigned segs_per_lane(prec_e p);
    return 1 << p;
  endfunction

  // Segment k is the lowest segment of its lane.
  function automatic logic seg_is_lane_lo(prec_e p, int unsigned k);
    return (k % segs_per_lane(p)) == 0;
  endfunction

  // Index of the top segment of the lane that holds segment k.
  function automatic int unsigned lane_top_seg(prec_e p, int unsigned k);
    return k | (segs_per_lane(p) - 1);
  endfunction

  // Per-segment sign of each lane of w (the "Sign-Extract" of the stage).
  function automatic logic [SEGS-1:0] lane_signs(prec_e p, word_t w);
    logic [SEGS-1:0] s;
    for (int unsigned k = 0; k < SEGS; k++) s[k] = w[4*lane_top_seg(p, k) + 3];
    return s;
  endfunction

  // Replicate an N-bit lane value (given in the low bits) across the word.
  function automatic word_t replicate(prec_e p, word_t v);
    word_t r;
    int unsigned n;
    n = lane_bits(p);
    for (int unsigned b = 0; b < WORD; b++) r[b] = v[b % n];
    return r;
  endfunction

  // Round a 32-bit master constant (32-N extra fraction bits) to N bits.
  function automatic word_t round_master(prec_e p, logic [31:0] master);
    int unsigned sh;
    sh = WORD - lane_bits(p);
    if (sh == 0) return master;
    return (master >> sh) + word_t'(master[sh - 1]);
  endfunction

  // atanh(2^-i) with 30 fraction bits, i = 1..16 (index 0 unused).
  localparam logic [31:0] ATANH_Q30 [0:16] = '{
    32'h0000_0000,
    32'h2327_d4f5, 32'h1058_aefb, 32'h080a_c48e, 32'h0401_5623,
    32'h0200_2ab1, 32'h0100_0556, 32'h0080_00ab, 32'h0040_0015,
    32'h0020_0003, 32'h0010_0000, 32'h0008_0000, 32'h0004_0000,
    32'h0002_0000, 32'h0001_0000, 32'h0000_8000, 32'h0000_4000
  };

  // 1/Kh with 29 fraction bits, for the two hyperbolic stage sequences used:
  // four stages i = 1,2,3,4 and eight stages i = 1,2,3,4,4,5,6,7.
  localparam logic [31:0] KINV4_Q29 = 32'h268a_0c9b;  // 1.20435
  localparam logic [31:0] KINV8_Q29 = 32'h26a3_b71d;  // 1.20748

  // Number of hyperbolic and linear CORDIC iterations per precision
  // (paper: 4 hyperbolic and 5 linear for 8/16 bit, 8 and 10 for 32 bit,
  // 4 for 4 bit).
  function automatic int unsigned hyp_iters(prec_e p);
    return (p == PREC32) ? 8 : 4;
  endfunction

  function automatic int unsigned lin_iters(prec_e p);
    case (p)
      PREC4:   return 4;
      PREC32:  return 10;
      default: return 5;
    endcase
  endfunction

  // Shift index i of hyperbolic iteration k (k = 0 first); iteration 4 is
  // repeated in the eight-stage sequence.
  function automatic logic [4:0] hyp_shift(int unsigned k);
    return (k < 4) ? 5'(k + 1) : 5'(k);
  endfunction

  // Start value X0 = 1/Kh for the hyperbolic sequence used at precision p,
  // in data format, replicated across lanes.
  function automatic word_t x0_word(prec_e p);
    return replicate(p, round_master(p, (p == PREC32) ? KINV8_Q29 : KINV4_Q29));
  endfunction

  // ReLU per lane: negative lanes become 0.
  function automatic word_t relu_word(prec_e p, word_t v);
    logic [SEGS-1:0] s;
    word_t r;
    s = lane_signs(p, v);
    for (int unsigned b = 0; b < WORD; b++) r[b] = s[b / 4] ? 1'b0 : v[b];
    return r;
  endfunction

  // The value 1.0 in data format, replicated across lanes.
  function automatic word_t one_word(prec_e p);
    return replicate(p, word_t'(1) << (lane_bits(p) - 3));
  endfunction

endpackage
