// mp_pkg: types and constants shared by the mixed-precision inner-product datapath.
//
// Operands are 16-bit words. An operand type says how a word is split into 4-bit
// "nibbles" that the 5b x 5b signed multipliers consume: INT4/8/12/16 use 1..4 nibbles,
// FP16 uses three nibbles of its 12-bit signed magnitude. The nibble count per type and the
// fixed accumulator geometry (33 + t + l bits, 30 of them fraction, 8-bit exponent) follow
// the architecture description; the type encoding itself is this design's choice.
package mp_pkg;

  typedef enum logic [2:0] {
    DT_INT4  = 3'd0,
    DT_INT8  = 3'd1,
    DT_INT12 = 3'd2,
    DT_INT16 = 3'd3,
    DT_FP16  = 3'd4
  } dtype_t;

  localparam int unsigned DATA_W   = 16;  // operand word
  localparam int unsigned NIB_W    = 5;   // signed nibble fed to a multiplier
  localparam int unsigned MAX_NIBS = 4;   // INT16 = 4 nibbles
  localparam int unsigned PROD_W   = 10;  // 5b x 5b signed product (see mc_ipu notes)
  localparam int unsigned EXP_W    = 8;   // accumulator / product exponent register
  localparam int unsigned DIFF_W   = 6;   // exponent difference, 0..58
  localparam int unsigned FRAC_BITS = 30; // accumulator fraction bits w.r.t. its exponent

  // Number of nibble iterations an operand of this type needs along its own axis.
  function automatic logic [2:0] dtype_nibbles(dtype_t t);
    case (t)
      DT_INT4:  return 3'd1;
      DT_INT8:  return 3'd2;
      DT_INT12: return 3'd3;
      DT_INT16: return 3'd4;
      default:  return 3'd3;  // FP16: 12-bit signed magnitude
    endcase
  endfunction

endpackage
