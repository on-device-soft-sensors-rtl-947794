// soft_sensor_top -- accelerator side of an on-device soft sensor: turns one
// sample of N_SENSORS physical level sensors into K_OUT soft-sensor values
// (here one fluid-flow estimate) with a small fixed-point MLP.
//
// The microcontroller owns the sensors and the radio; this block connects to
// it only. Per sampling period the MCU writes the N_SENSORS inputs over the
// register bus (see host_if for the map), writes CTRL to start, waits for irq,
// and reads the result. Inside, host_if feeds mlp_engine, a hidden layer of
// N_HIDDEN ReLU neurons and a linear output layer, both run one neuron at a
// time on a single multiply-accumulate unit per layer.
//
// Timing at the defaults (3-120-1): one cycle for the start register, then
// 603 engine cycles; the done flag is set by the edge that ends the engine's
// done cycle, so irq rises 604 cycles after the clock edge that takes the CTRL
// write (6.04 us at 100 MHz, well inside a 100 us sample period at 10 kHz).
// The network shape (3 inputs, one hidden layer, one output) and the 8-bit
// format with 4 fraction bits follow the model; the bus, register map and
// schedule are this design's choices.
//
// Trained parameters: W1_FILE/B1_FILE/W2_FILE/B2_FILE name hex files (one
// two-digit Q4.4 word per line) for the hidden weights (neuron o, input i at
// line o*N + i), hidden biases, output weights (output k, hidden o at line
// k*H + o) and output biases. Left empty, the ROMs hold a fixed pseudo-random
// placeholder set (see softsensor_pkg).
module soft_sensor_top
  import softsensor_pkg::*;
#(
  parameter int unsigned N_SENSORS_P = N_SENSORS,
  parameter int unsigned N_HIDDEN_P  = N_HIDDEN,
  parameter int unsigned K_OUT_P     = K_OUT,
  parameter string       W1_FILE     = "",   // hidden weights, word o*N + i
  parameter string       B1_FILE     = "",   // hidden biases
  parameter string       W2_FILE     = "",   // output weights, word k*H + o
  parameter string       B2_FILE     = ""    // output biases
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] bus_addr,
  input  logic [7:0] bus_wdata,
  input  logic       bus_we,
  input  logic       bus_re,
  output logic [7:0] bus_rdata,
  output logic       irq
);

  logic eng_start, eng_busy, eng_done;
  fxp_t eng_x [N_SENSORS_P];
  fxp_t eng_y [K_OUT_P];

  host_if #(.N_IN(N_SENSORS_P), .N_HID(N_HIDDEN_P), .N_OUT(K_OUT_P)) u_host (
    .clk, .rst_n,
    .bus_addr, .bus_wdata, .bus_we, .bus_re, .bus_rdata, .irq,
    .eng_start, .eng_x, .eng_busy, .eng_done, .eng_y
  );

  mlp_engine #(.N_IN(N_SENSORS_P), .N_HID(N_HIDDEN_P), .N_OUT(K_OUT_P),
               .W1_FILE(W1_FILE), .B1_FILE(B1_FILE), .W2_FILE(W2_FILE), .B2_FILE(B2_FILE))
    u_engine (
    .clk, .rst_n,
    .start(eng_start),
    .x    (eng_x),
    .busy (eng_busy),
    .done (eng_done),
    .y    (eng_y)
  );

endmodule
