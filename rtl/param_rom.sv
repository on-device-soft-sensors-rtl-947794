// param_rom -- read-only memory for one layer's weights or biases.
//
// The trained parameters are part of the accelerator's configuration, so they
// are held in a ROM rather than loaded at run time. With INIT_FILE set, the
// ROM is filled from that hex file ($readmemh, one WIDTH-bit word per line);
// with INIT_FILE empty it holds placeholder_word(SEED, index) from
// softsensor_pkg, a deterministic pseudo-random set used until a trained
// model is supplied.
//
// Read is asynchronous (distributed/LUT ROM): data follows addr in the same
// cycle, so the layer engine can fetch one weight per clock with no pipeline
// stage. Addresses at or past DEPTH read 0. The asynchronous read is this
// design's choice.
module param_rom
  import softsensor_pkg::*;
#(
  parameter int unsigned DEPTH     = N_SENSORS * N_HIDDEN,
  parameter int unsigned WIDTH     = TOTAL_BITS,
  parameter int unsigned SEED      = 1,
  parameter string       INIT_FILE = "",
  localparam int unsigned AW       = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic [AW-1:0]    addr,
  output logic [WIDTH-1:0] data
);

  logic [WIDTH-1:0] mem [DEPTH];

  initial begin
    if (INIT_FILE != "") begin
      $readmemh(INIT_FILE, mem);
    end else begin
      for (int unsigned i = 0; i < DEPTH; i++)
        mem[i] = WIDTH'(placeholder_word(SEED, i));
    end
  end

  assign data = (32'(addr) < DEPTH) ? mem[addr] : '0;

endmodule
