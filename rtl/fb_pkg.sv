// fb_pkg: types and constants shared by the FlexBlock datapath.
//
// A tensor element is stored in block floating point: a p-bit two's-complement
// "sign+mantissa" integer m (p = 4, 8 or 16) and an 8-bit exponent E shared by
// the whole block. Following the FP32 convention, E is biased by 127, and the
// value of an element is m * 2^(E - 127 - (p - 2)), so the largest element of a
// block has its leading one at 2^(E-127). The three precisions and the 8-bit
// exponent follow the paper (FB12/FB16/FB24); the bias and the scaling of m are
// this design's choice.
//
// The hierarchy multiplier -> PE (9 multipliers) -> PU (4 PEs) -> subcore (4 PUs)
// -> processing core (6 subcores) follows the paper; so do the 144-bit buses.
package fb_pkg;

  localparam int unsigned N_SUB   = 6;   // subcores per core
  localparam int unsigned N_PU    = 4;   // PUs per subcore
  localparam int unsigned N_PE    = 4;   // PEs per PU
  localparam int unsigned N_MUL   = 9;   // multipliers per PE
  localparam int unsigned SLOT_W  = 16;  // one 16-bit slot per multiplier column
  localparam int unsigned BUS_W   = N_MUL * SLOT_W;   // 144-bit subcore bus
  localparam int unsigned EXP_W   = 8;   // shared exponent width
  localparam int unsigned EXP_BIAS = 127;
  localparam int unsigned LANES   = 18;  // post-processing lanes (32b x 18)

  localparam int unsigned PROD_W  = 10;  // 5b x 5b signed product
  localparam int unsigned PE_W    = 14;  // sum of nine products
  localparam int unsigned PU_W    = 28;  // PE sums after input sub-word shifts
  localparam int unsigned R3_W    = 31;  // 6-way sum of PU outputs
  localparam int unsigned R2_W    = 42;  // 4-way sum with weight sub-word shifts
  localparam int unsigned SC_W    = 12;  // signed scale exponent

  // Precision of the sign+mantissa part of a tensor.
  typedef enum logic [1:0] {
    PREC4  = 2'd0,
    PREC8  = 2'd1,
    PREC16 = 2'd2
  } prec_e;

  // Which reduction unit takes the PU outputs.
  typedef enum logic {
    MODE_3D = 1'b0,
    MODE_2D = 1'b1
  } red_mode_e;

  // Subcore clustering of the 2D reduction unit (DW Conv3 / Conv5 / Conv7).
  typedef enum logic [1:0] {
    CL1 = 2'd0,   // every subcore is its own output
    CL3 = 2'd1,   // two clusters of three subcores
    CL6 = 2'd2    // one cluster of all six subcores
  } cluster_e;

  // Core datapath configuration.
  typedef struct packed {
    prec_e     x_prec;
    prec_e     w_prec;
    logic      x_signed;   // global sign bit for the input tensor
    logic      w_signed;   // global sign bit for the weight tensor
    red_mode_e mode;
    cluster_e  cluster;
  } core_cfg_t;

  function automatic int unsigned prec_bits(prec_e p);
    case (p)
      PREC4:   return 4;
      PREC8:   return 8;
      default: return 16;
    endcase
  endfunction

  // Bit weight of weight sub-word k (PU k) for a weight precision.
  function automatic int unsigned w_shift(prec_e p, int unsigned k);
    case (p)
      PREC16:  return 4 * k;
      PREC8:   return 4 * (k % 2);
      default: return 0;
    endcase
  endfunction

  // Bit weight of input sub-word k (PE k) for an input precision.
  function automatic int unsigned x_shift(prec_e p, int unsigned k);
    return w_shift(p, k);
  endfunction

  // Input channel (within a 16-bit slot) that PE k works on: channel 0 sits in
  // the upper bits of the slot, so PE3 (and PE2 in X8) take channel 0.
  function automatic int unsigned pe_chan(prec_e p, int unsigned k);
    case (p)
      PREC16:  return 0;
      PREC8:   return (3 - k) / 2;
      default: return 3 - k;
    endcase
  endfunction

  // Whether sub-word k is the top (signed) sub-word of its element.
  function automatic logic top_subword(prec_e p, int unsigned k);
    case (p)
      PREC16:  return (k == 3);
      PREC8:   return (k % 2) == 1;
      default: return 1'b1;
    endcase
  endfunction

  // Maps FP32 bits to an unsigned key whose order is the numeric order
  // (used by the max pool, ReLU-alpha clipping and BN min/max).
  function automatic logic [31:0] fp_key(logic [31:0] f);
    return f[31] ? ~f : (f | 32'h8000_0000);
  endfunction

endpackage
