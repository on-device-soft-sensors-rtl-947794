// tb_host_if -- self-checking test of the MCU register interface.
//
// The engine is replaced by a small model in this file: after eng_start it
// stays busy for ENG_CYCLES cycles, then pulses done and presents results it
// derives from the inputs (y[k] = x[0] + x[1] - x[2] + k, wrapped to 8 bits).
// Checked: input registers read back; configuration registers; a CTRL write
// gives exactly one eng_start pulse one cycle later with the written inputs;
// STATUS busy/done bits and irq; a CTRL write while busy is rejected (no
// pulse, STATUS bit2 set) and clears with write-1; done clears with write-1
// and with the next start; results read back from the y registers.
module tb_host_if;
  import softsensor_pkg::*;

  localparam int N = 3, K = 2, H = 17, ENG_CYCLES = 20;
  logic clk = 0, rst_n = 0;
  logic [7:0] addr = '0, wdata = '0, rdata;
  logic we = 0, re = 0, irq, eng_start;
  fxp_t eng_x [N], eng_y [K];
  logic eng_busy = 0, eng_done = 0;
  int checks = 0, failures = 0;
  int starts_seen = 0;

  always #5 clk = ~clk;

  host_if #(.N_IN(N), .N_HID(H), .N_OUT(K)) dut (
    .clk, .rst_n, .bus_addr(addr), .bus_wdata(wdata), .bus_we(we), .bus_re(re),
    .bus_rdata(rdata), .irq, .eng_start, .eng_x, .eng_busy, .eng_done, .eng_y);

  // engine model
  int cnt = 0;
  always @(posedge clk) begin
    eng_done <= 1'b0;
    if (!rst_n) begin
      eng_busy <= 1'b0;
      cnt <= 0;
    end else if (eng_start) begin
      starts_seen++;
      eng_busy <= 1'b1;
      cnt <= ENG_CYCLES;
    end else if (eng_busy) begin
      if (cnt == 1) begin
        eng_busy <= 1'b0;
        eng_done <= 1'b1;
        for (int k = 0; k < K; k++) eng_y[k] <= fxp_t'(int'(eng_x[0]) + int'(eng_x[1]) - int'(eng_x[2]) + k);
      end
      cnt <= cnt - 1;
    end
  end

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Bus cycles are driven from the falling edge and taken at the next rising edge.
  task automatic bus_write(logic [7:0] a, logic [7:0] d);
    @(negedge clk);
    addr = a; wdata = d; we = 1;
    @(negedge clk);
    we = 0;
  endtask

  task automatic bus_read(logic [7:0] a, output logic [7:0] d);
    @(negedge clk);
    addr = a; re = 1;
    @(negedge clk);
    re = 0;
    d = rdata;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] d;
    int xv [N];
    int n_before, rejects;
    rejects = 0;
    for (int k = 0; k < K; k++) eng_y[k] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    bus_read(REG_CFG_H, d); check(int'(d), H, "cfg hidden");
    bus_read(REG_CFG_N, d); check(int'(d), N, "cfg inputs");
    bus_read(REG_CFG_K, d); check(int'(d), K, "cfg outputs");
    bus_read(REG_STATUS, d); check(int'(d), 0, "status after reset");
    check(int'(irq), 0, "irq after reset");
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < N; i++) begin
        xv[i] = $urandom_range(255);
        bus_write(REG_X_BASE + 8'(i), 8'(xv[i]));
      end
      for (int i = 0; i < N; i++) begin
        bus_read(REG_X_BASE + 8'(i), d); check(int'(d), xv[i], "x readback");
      end
      n_before = starts_seen;
      bus_write(REG_CTRL, 8'h01);
      check(int'(eng_start), 1, "start pulse one cycle after CTRL write");
      for (int i = 0; i < N; i++) check(int'(eng_x[i]), int'($signed(8'(xv[i]))), "engine sees inputs");
      @(negedge clk);
      check(int'(eng_start), 0, "start pulse one cycle long");
      check(int'(irq), 0, "done cleared by start");
      bus_read(REG_STATUS, d); check(int'(d[0]), 1, "status busy");
      // start while busy: rejected
      bus_write(REG_CTRL, 8'h01);
      @(negedge clk);
      check(int'(eng_start), 0, "no pulse while busy");
      bus_read(REG_STATUS, d); check(int'(d[2]), 1, "rejected flag");
      rejects++;
      bus_write(REG_STATUS, 8'h04);
      bus_read(REG_STATUS, d); check(int'(d[2]), 0, "rejected flag cleared");
      while (!irq) @(posedge clk);
      check(starts_seen - n_before, 1, "one engine start per command");
      bus_read(REG_STATUS, d); check(int'(d), 2, "status done, not busy");
      for (int k = 0; k < K; k++) begin
        bus_read(REG_Y_BASE + 8'(k), d);
        check(int'(d), (xv[0] + xv[1] - xv[2] + k) & 255, "y readback");
      end
      if (t % 2 == 0) begin
        bus_write(REG_STATUS, 8'h02);
        @(negedge clk);
        check(int'(irq), 0, "done cleared by write-1");
      end
    end
    checks++;
    if (rejects == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
