// host_if -- register interface between the microcontroller and the
// accelerator.
//
// The MCU moves the sensor samples into the accelerator, triggers inference,
// is signalled when it has finished, and reads the result. Here that is done
// over a synchronous 8-bit register bus (bus_addr, bus_wdata, bus_we, bus_re,
// bus_rdata) in the accelerator's clock domain:
//   0x00+i  x[i]   R/W  sensor input i, Q4.4
//   0x10    CTRL   W    bit0 = 1: start an inference
//   0x11    STATUS R/W1C bit0 busy, bit1 done, bit2 start rejected (written
//                        while the engine was busy); write 1 to clear bit1/bit2
//   0x20+k  y[k]   R    soft-sensor output k, Q4.4
//   0x30..32 CFG   R    hidden size, input count, output count
// Writes take effect at the clock edge where bus_we is high; a read returns
// its data on bus_rdata in the cycle after bus_re (registered). An accepted
// start gives eng_start one cycle after the CTRL write and clears done; the
// engine's done pulse sets the sticky done flag, and irq (to the MCU) follows
// that flag. The handshake's roles are the system's (MCU loads and triggers,
// accelerator signals completion); the bus, register map and flags are this
// design's choices.
module host_if
  import softsensor_pkg::*;
#(
  parameter int unsigned N_IN  = N_SENSORS,
  parameter int unsigned N_HID = N_HIDDEN,
  parameter int unsigned N_OUT = K_OUT
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] bus_addr,
  input  logic [7:0] bus_wdata,
  input  logic       bus_we,
  input  logic       bus_re,
  output logic [7:0] bus_rdata,
  output logic       irq,
  output logic       eng_start,
  output fxp_t       eng_x [N_IN],
  input  logic       eng_busy,
  input  logic       eng_done,
  input  fxp_t       eng_y [N_OUT]
);

  logic done_flag, rej_flag;
  logic start_req, start_ok;

  assign start_req = bus_we && bus_addr == REG_CTRL && bus_wdata[0];
  assign start_ok  = start_req && !eng_busy && !eng_start;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N_IN; i++) eng_x[i] <= '0;
      eng_start <= 1'b0;
      done_flag <= 1'b0;
      rej_flag  <= 1'b0;
      bus_rdata <= '0;
    end else begin
      eng_start <= start_ok;

      if (bus_we) begin
        for (int i = 0; i < N_IN; i++)
          if (bus_addr == REG_X_BASE + 8'(i)) eng_x[i] <= fxp_t'(bus_wdata);
      end

      if (eng_done)                                                  done_flag <= 1'b1;
      else if (start_ok)                                             done_flag <= 1'b0;
      else if (bus_we && bus_addr == REG_STATUS && bus_wdata[1])     done_flag <= 1'b0;

      if (start_req && !start_ok)                                    rej_flag <= 1'b1;
      else if (bus_we && bus_addr == REG_STATUS && bus_wdata[2])     rej_flag <= 1'b0;

      if (bus_re) begin
        bus_rdata <= '0;
        if (bus_addr == REG_STATUS) bus_rdata <= {5'b0, rej_flag, done_flag, eng_busy || eng_start};
        if (bus_addr == REG_CFG_H)  bus_rdata <= 8'(N_HID);
        if (bus_addr == REG_CFG_N)  bus_rdata <= 8'(N_IN);
        if (bus_addr == REG_CFG_K)  bus_rdata <= 8'(N_OUT);
        for (int i = 0; i < N_IN; i++)
          if (bus_addr == REG_X_BASE + 8'(i)) bus_rdata <= eng_x[i];
        for (int k = 0; k < N_OUT; k++)
          if (bus_addr == REG_Y_BASE + 8'(k)) bus_rdata <= eng_y[k];
      end
    end
  end

  assign irq = done_flag;

  a_start_pulse: assert property (@(posedge clk) disable iff (!rst_n)
    eng_start |=> !eng_start);
  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    eng_start |-> !eng_busy);

endmodule
