// linear_layer -- one fully connected layer, computed one neuron at a time
// with a single multiply-accumulate unit.
//
// On start (accepted only while idle) the layer walks its OUT neurons in
// order. For neuron o it spends IN cycles reading input i (in_addr/in_data,
// combinational read from the producer) and weight W[o][i] (weight ROM word
// o*IN + i) and accumulating their product; in one more cycle it reads bias
// b[o], requantises, applies ACT and writes the result (out_we, out_addr = o,
// out_data). After the last neuron a one-cycle done pulse follows.
//
// Timing: with start sampled at clock edge 0, done is high in the cycle that
// ends at edge OUT*(IN+1)+1. busy is high from edge 0 until done falls.
// Weights and biases come from two param_rom instances, filled from W_FILE /
// B_FILE or from the placeholder generator (seeds W_SEED / B_SEED).
// The neuron function (weighted sum, bias, activation) is the MLP's; the
// one-MAC sequential schedule and the handshake are this design's choices.
module linear_layer
  import softsensor_pkg::*;
#(
  parameter int unsigned IN      = N_SENSORS,
  parameter int unsigned OUT     = N_HIDDEN,
  parameter act_e        ACT     = ACT_RELU,
  parameter int unsigned W_SEED  = 1,
  parameter int unsigned B_SEED  = 2,
  parameter string       W_FILE  = "",
  parameter string       B_FILE  = "",
  localparam int unsigned IAW    = (IN > 1) ? $clog2(IN) : 1,
  localparam int unsigned OAW    = (OUT > 1) ? $clog2(OUT) : 1,
  localparam int unsigned WAW    = (IN*OUT > 1) ? $clog2(IN*OUT) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic [IAW-1:0] in_addr,
  input  fxp_t           in_data,
  output logic           out_we,
  output logic [OAW-1:0] out_addr,
  output fxp_t           out_data
);

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_FIN, S_DONE} state_e;
  state_e         state;
  logic [IAW-1:0] i_cnt;
  logic [OAW-1:0] o_cnt;
  logic [WAW-1:0] w_addr;
  fxp_t           w_data, b_data, mac_result;

  param_rom #(.DEPTH(IN*OUT), .WIDTH(TOTAL_BITS), .SEED(W_SEED), .INIT_FILE(W_FILE))
    u_wrom (.addr(w_addr), .data(w_data));
  param_rom #(.DEPTH(OUT), .WIDTH(TOTAL_BITS), .SEED(B_SEED), .INIT_FILE(B_FILE))
    u_brom (.addr(o_cnt), .data(b_data));

  fxp_mac #(.ACT(ACT)) u_mac (
    .clk, .rst_n,
    .clear (i_cnt == '0),
    .en    (state == S_MAC),
    .a     (in_data),
    .b     (w_data),
    .bias  (b_data),
    .result(mac_result)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      i_cnt  <= '0;
      o_cnt  <= '0;
      w_addr <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state  <= S_MAC;
          i_cnt  <= '0;
          o_cnt  <= '0;
          w_addr <= '0;
        end
        S_MAC: begin
          w_addr <= w_addr + 1'b1;
          if (32'(i_cnt) == IN - 1) state <= S_FIN;
          else                      i_cnt <= i_cnt + 1'b1;
        end
        S_FIN: begin
          i_cnt <= '0;
          if (32'(o_cnt) == OUT - 1) state <= S_DONE;
          else begin
            o_cnt <= o_cnt + 1'b1;
            state <= S_MAC;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy     = (state != S_IDLE);
  assign done     = (state == S_DONE);
  assign in_addr  = i_cnt;
  assign out_we   = (state == S_FIN);
  assign out_addr = o_cnt;
  assign out_data = mac_result;

  // A start while busy is a protocol error: the producer must wait for done.
  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    !(start && busy && !done));
  a_done_one_cycle: assert property (@(posedge clk) disable iff (!rst_n)
    done |=> !done);

endmodule
