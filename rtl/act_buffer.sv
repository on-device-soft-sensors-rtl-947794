// act_buffer -- register file holding the hidden-layer activations.
//
// The hidden layer writes one activation per finished neuron (we, waddr,
// wdata, stored at the clock edge); the output layer reads them back in order
// through a combinational read port (rdata follows raddr in the same cycle).
// There is no reset: every entry is written by the hidden layer before the
// output layer reads it in the same inference. Registers with a combinational
// read are this design's choice for a buffer of at most a few hundred bytes.
module act_buffer
  import softsensor_pkg::*;
#(
  parameter int unsigned DEPTH = N_HIDDEN,
  parameter int unsigned WIDTH = TOTAL_BITS,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
  end

  assign rdata = (32'(raddr) < DEPTH) ? mem[raddr] : '0;

endmodule
