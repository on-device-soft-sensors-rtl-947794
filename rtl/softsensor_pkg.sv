// softsensor_pkg -- types, sizes and arithmetic shared by the soft-sensor
// accelerator.
//
// Numbers are signed fixed point with TOTAL_BITS = 8 and FRAC_BITS = 4 (Q4.4,
// range -8.0 .. +7.9375, step 1/16), the format the model was quantised to.
// A product of two Q4.4 words is Q8.8; sums of products are kept exactly in
// an ACC_W-bit accumulator and brought back to Q4.4 by requant(): add the
// bias aligned to 2*FRAC_BITS fraction bits, shift right by FRAC_BITS
// (round toward minus infinity) and saturate. Rounding, saturation and the
// accumulator width are this design's choices; the 8/4 format is the model's.
//
// Default network size: N_SENSORS = 3 level sensors in, N_HIDDEN = 120 hidden
// neurons (the largest of the evaluated 10/30/60/120), K_OUT = 1 flow value out.
// The hidden layer uses ReLU and the output neuron is linear (a design choice:
// the activation is not specified by the model description).
//
// placeholder_word() produces a deterministic pseudo-random weight in
// [-8, 7] (-0.5 .. +0.4375) from (seed, index). It fills the weight ROMs when
// no trained weight file is given, so the hardware can be simulated without a
// trained model. The formula is a 32-bit integer hash:
//   h = seed*0x9E3779B1 ^ (idx + 0x7F4A7C15); h ^= h>>15; h *= 0x2C1B3C6D;
//   h ^= h>>12; h *= 0x297A2D39; h ^= h>>15; word = sign-extend(h[3:0]).
package softsensor_pkg;

  parameter int unsigned TOTAL_BITS = 8;
  parameter int unsigned FRAC_BITS  = 4;
  parameter int unsigned ACC_W      = 24;   // exact for fan-in up to 256

  parameter int unsigned N_SENSORS  = 3;
  parameter int unsigned N_HIDDEN   = 120;
  parameter int unsigned K_OUT      = 1;

  typedef logic signed [TOTAL_BITS-1:0] fxp_t;
  typedef logic signed [ACC_W-1:0]      acc_t;

  typedef enum logic {ACT_NONE = 1'b0, ACT_RELU = 1'b1} act_e;

  localparam fxp_t FXP_MAX = fxp_t'({1'b0, {(TOTAL_BITS-1){1'b1}}});
  localparam fxp_t FXP_MIN = fxp_t'({1'b1, {(TOTAL_BITS-1){1'b0}}});

  // MCU register map (byte addresses on the 8-bit register bus)
  parameter logic [7:0] REG_X_BASE = 8'h00;  // sensor inputs x[0..N-1]
  parameter logic [7:0] REG_CTRL   = 8'h10;  // write bit0 = 1: start inference
  parameter logic [7:0] REG_STATUS = 8'h11;  // bit0 busy, bit1 done, bit2 start rejected
  parameter logic [7:0] REG_Y_BASE = 8'h20;  // results y[0..K-1]
  parameter logic [7:0] REG_CFG_H  = 8'h30;  // hidden size (read only)
  parameter logic [7:0] REG_CFG_N  = 8'h31;  // input count (read only)
  parameter logic [7:0] REG_CFG_K  = 8'h32;  // output count (read only)

  // Bias aligned to the accumulator's 2*FRAC_BITS fraction, shift, saturate.
  function automatic fxp_t requant(acc_t acc, fxp_t bias);
    acc_t sum;
    acc_t shifted;
    sum     = acc + (acc_t'(bias) <<< FRAC_BITS);
    shifted = sum >>> FRAC_BITS;
    if (shifted > acc_t'(FXP_MAX))      return FXP_MAX;
    else if (shifted < acc_t'(FXP_MIN)) return FXP_MIN;
    else                                return fxp_t'(shifted);
  endfunction

  function automatic fxp_t activate(fxp_t v, act_e act);
    if (act == ACT_RELU && v < 0) return '0;
    return v;
  endfunction

  function automatic logic [31:0] placeholder_hash(int unsigned seed, int unsigned idx);
    logic [31:0] h;
    h = (seed * 32'h9E37_79B1) ^ (idx + 32'h7F4A_7C15);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A_2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  function automatic fxp_t placeholder_word(int unsigned seed, int unsigned idx);
    logic [3:0] h;
    h = 4'(placeholder_hash(seed, idx));
    return fxp_t'({{(TOTAL_BITS-4){h[3]}}, h});
  endfunction

endpackage
