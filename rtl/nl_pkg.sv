// nl_pkg: number formats and constants shared by the Softmax and LayerNorm units.
//
// Softmax inputs are signed INT8 logits with SM_X_FRAC = 3 fractional bits, so one
// LSB is 1/8 and the radix R = 8 of the exponential split equals 1.0 in real units:
// delta = max - x splits into frac = delta >> 3 (integer part) and rem = delta & 7
// (eighths). The two exponential tables hold e^-frac and e^-(rem/8) with EXP_F = 12
// fractional bits (4096 = 1.0). LUT_init has 7 entries (frac = 0..6) and LUT_rem has
// 8 entries (rem = 0..7), the sizes the architecture uses; a delta with frac >= 7
// gives an exponential of zero. Softmax outputs are unsigned with SM_P_FRAC = 7
// fractional bits, so D_max = 2^7 stands for a probability of 1.0.
//
// The table sizes and R = 8 follow the architecture description; the fixed-point
// formats (3 input fraction bits, 12 table bits, 7 output bits) are this design's
// own choices.
package nl_pkg;

  // ---------------- Softmax ----------------
  parameter int unsigned SM_X_W      = 8;   // INT8 input
  parameter int unsigned SM_X_FRAC   = 3;   // log2(R), R = 8
  parameter int unsigned EXP_F       = 12;  // fractional bits of the exponential tables
  parameter int unsigned EXP_W       = EXP_F + 1;
  parameter int unsigned LUT_INIT_N  = 7;
  parameter int unsigned LUT_REM_N   = 8;
  parameter int unsigned SM_P_FRAC   = 7;   // D_max = 2^SM_P_FRAC
  parameter int unsigned SM_P_W      = 8;   // INT8 output

  typedef logic [EXP_W-1:0] exp_t;

  // LUT_init[f] = round(e^-f * 2^12), f = 0..6
  function automatic exp_t lut_init(input logic [2:0] f);
    case (f)
      3'd0: return 13'd4096;
      3'd1: return 13'd1507;
      3'd2: return 13'd554;
      3'd3: return 13'd204;
      3'd4: return 13'd75;
      3'd5: return 13'd28;
      3'd6: return 13'd10;
      default: return 13'd0;
    endcase
  endfunction

  // LUT_rem[r] = round(e^-(r/8) * 2^12), r = 0..7
  function automatic exp_t lut_rem(input logic [2:0] r);
    case (r)
      3'd0: return 13'd4096;
      3'd1: return 13'd3615;
      3'd2: return 13'd3190;
      3'd3: return 13'd2815;
      3'd4: return 13'd2484;
      3'd5: return 13'd2192;
      3'd6: return 13'd1935;
      default: return 13'd1707;
    endcase
  endfunction

  // ---------------- LayerNorm ----------------
  parameter int unsigned LN_X_W   = 8;   // INT8 input
  parameter int unsigned LN_RL    = 48;  // fractional bits of the 1/C input
  parameter int unsigned LN_MF    = 16;  // fractional bits of mean and of (x - mean)
  parameter int unsigned LN_VF    = 16;  // fractional bits of the variance
  parameter int unsigned LN_YF    = 16;  // fractional bits of 1/sqrt(var)
  parameter int unsigned LN_OUT_F = 4;   // fractional bits of the INT8 output
  parameter int unsigned LN_OUT_W = 8;

  // widths derived from the formats
  parameter int unsigned LN_VAR_W = 2*LN_X_W - 1 + LN_VF;      // var < 2^14 -> 30 bits
  parameter int unsigned LN_R_W   = LN_YF + LN_VF/2 + 2;       // 1/sqrt(var) <= 2^(VF/2)
  parameter int unsigned LN_MEAN_W = LN_X_W + LN_MF + 1;

endpackage
