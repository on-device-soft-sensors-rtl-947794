// mlp_engine -- the inference accelerator: an N_IN -> N_HID -> N_OUT
// multilayer perceptron in Q4.4 fixed point.
//
// start (taken while idle) copies the input vector x into the engine's input
// registers and starts the hidden layer (N_IN -> N_HID, ReLU), which writes
// its activations into act_buffer. The hidden layer's done pulse starts the
// output layer (N_HID -> N_OUT, no activation), which reads act_buffer and
// writes the result registers y. done pulses for one cycle when y is valid;
// y holds its value until the next inference overwrites it.
//
// Timing: with start sampled at edge 0, done is high in the cycle ending at
// edge N_HID*(N_IN+1)+1 + N_OUT*(N_HID+1)+1, i.e. 603 cycles for 3-120-1
// (6.03 us at 100 MHz). The network shape and number format follow the model;
// the layer-after-layer schedule, the register-file buffer and the ReLU/linear
// activations are this design's choices.
module mlp_engine
  import softsensor_pkg::*;
#(
  parameter int unsigned N_IN   = N_SENSORS,
  parameter int unsigned N_HID  = N_HIDDEN,
  parameter int unsigned N_OUT  = K_OUT,
  parameter string       W1_FILE = "",
  parameter string       B1_FILE = "",
  parameter string       W2_FILE = "",
  parameter string       B2_FILE = ""
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fxp_t x [N_IN],
  output logic busy,
  output logic done,
  output fxp_t y [N_OUT]
);

  localparam int unsigned IAW = (N_IN  > 1) ? $clog2(N_IN)  : 1;
  localparam int unsigned HAW = (N_HID > 1) ? $clog2(N_HID) : 1;
  localparam int unsigned OAW = (N_OUT > 1) ? $clog2(N_OUT) : 1;

  fxp_t           x_reg [N_IN];
  logic           h_busy, h_done, o_busy, o_done;
  logic [IAW-1:0] h_in_addr;
  logic           h_we;
  logic [HAW-1:0] h_waddr, o_in_addr;
  fxp_t           h_wdata, h_rdata, o_wdata;
  logic           o_we;
  logic [OAW-1:0] o_waddr;
  logic           go;

  assign go = start && !busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < N_IN; k++) x_reg[k] <= '0;
    end else if (go) begin
      x_reg <= x;
    end
  end

  linear_layer #(.IN(N_IN), .OUT(N_HID), .ACT(ACT_RELU), .W_SEED(1), .B_SEED(2),
                 .W_FILE(W1_FILE), .B_FILE(B1_FILE))
    u_hidden (
      .clk, .rst_n,
      .start   (go),
      .busy    (h_busy),
      .done    (h_done),
      .in_addr (h_in_addr),
      .in_data ((32'(h_in_addr) < N_IN) ? x_reg[h_in_addr] : fxp_t'(0)),
      .out_we  (h_we),
      .out_addr(h_waddr),
      .out_data(h_wdata)
    );

  act_buffer #(.DEPTH(N_HID), .WIDTH(TOTAL_BITS)) u_buf (
    .clk,
    .we   (h_we),
    .waddr(h_waddr),
    .wdata(h_wdata),
    .raddr(o_in_addr),
    .rdata(h_rdata)
  );

  linear_layer #(.IN(N_HID), .OUT(N_OUT), .ACT(ACT_NONE), .W_SEED(3), .B_SEED(4),
                 .W_FILE(W2_FILE), .B_FILE(B2_FILE))
    u_output (
      .clk, .rst_n,
      .start   (h_done),
      .busy    (o_busy),
      .done    (o_done),
      .in_addr (o_in_addr),
      .in_data (h_rdata),
      .out_we  (o_we),
      .out_addr(o_waddr),
      .out_data(o_wdata)
    );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < N_OUT; k++) y[k] <= '0;
    end else if (o_we && 32'(o_waddr) < N_OUT) begin
      y[o_waddr] <= o_wdata;
    end
  end

  assign busy = h_busy || o_busy;
  assign done = o_done;

endmodule
