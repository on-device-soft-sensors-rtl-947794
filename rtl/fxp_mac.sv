// fxp_mac -- fixed-point multiply-accumulate unit with bias, requantisation
// and activation: the arithmetic core of one neuron.
//
// Each cycle with en = 1 the signed Q4.4 product a*b is added to the ACC_W-bit
// accumulator; with clear = 1 as well, the accumulator restarts from this
// product. The output is combinational from the accumulator:
//   result = activate(requant(acc, bias), ACT)
// i.e. bias added at the product's scale, shift right by FRAC_BITS with floor
// rounding, saturation to 8 bits, then ReLU (ACT_RELU) or nothing (ACT_NONE).
// The 8-bit Q4.4 format is the model's; the exact accumulator, floor rounding
// and saturation are this design's choices.
//
// Timing: result reflects every product accepted up to the previous clock
// edge. Reset clears the accumulator (active-low, synchronous).
module fxp_mac
  import softsensor_pkg::*;
#(
  parameter act_e ACT = ACT_RELU
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic en,
  input  fxp_t a,
  input  fxp_t b,
  input  fxp_t bias,
  output fxp_t result
);

  acc_t acc;
  acc_t product;
  assign product = acc_t'(a) * acc_t'(b);

  always_ff @(posedge clk) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= (clear ? acc_t'(0) : acc) + product;
  end

  assign result = activate(requant(acc, bias), ACT);

endmodule
