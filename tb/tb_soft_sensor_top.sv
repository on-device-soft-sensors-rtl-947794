// tb_soft_sensor_top -- end-to-end test of the soft-sensor accelerator at its
// default size (3 sensors, 120 hidden neurons, 1 output), driven the way the
// microcontroller drives it.
//
// Each inference: write the three sensor samples, write CTRL, optionally try a
// second CTRL write while busy (must be rejected, STATUS bit2), wait for irq,
// read STATUS and the result, clear done either by writing STATUS bit1 or by
// the next start. Inputs alternate between small values and full-range values
// so that the output saturates now and then. Every result is compared with the
// reference MLP of tb_ref_pkg; the time from the CTRL write to irq is checked
// against the design's schedule (LAT below: 604 cycles at the defaults) and against the real-time
// budget of one 10 kHz sample period (10,000 cycles at 100 MHz).
// Counted mechanisms (each must occur at least once): hidden ReLU clamping,
// saturation, rejected start, done cleared by write-1, done cleared by start.
module tb_soft_sensor_top;
  import softsensor_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = N_SENSORS, H = N_HIDDEN, K = K_OUT;
  // CTRL write edge -> start register (1) -> engine (H*(N+1)+1 + K*(H+1)+1) -> done flag
  localparam int LAT = 1 + H*(N+1)+1 + K*(H+1)+1;
  localparam int INFERENCES = 40;

  logic clk = 0, rst_n = 0;
  logic [7:0] addr = '0, wdata = '0, rdata;
  logic we = 0, re = 0, irq;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  soft_sensor_top dut (.clk, .rst_n, .bus_addr(addr), .bus_wdata(wdata), .bus_we(we),
                       .bus_re(re), .bus_rdata(rdata), .irq);

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_mlp m;
    logic [7:0] d;
    int xv[], cyc;
    int n_relu = 0, n_sat = 0, n_reject = 0, n_w1c = 0, n_clr_start = 0;
    m = new(N, H, K);
    xv = new[N];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    bus_read(REG_CFG_H, d); check(int'(d), H, "cfg hidden size");
    bus_read(REG_CFG_N, d); check(int'(d), N, "cfg inputs");
    bus_read(REG_CFG_K, d); check(int'(d), K, "cfg outputs");
    for (int t = 0; t < INFERENCES; t++) begin
      for (int i = 0; i < N; i++) begin
        xv[i] = (t % 2) ? $urandom_range(255) - 128 : $urandom_range(95) - 48;
        bus_write(REG_X_BASE + 8'(i), 8'(xv[i]));
      end
      m.run(xv);
      n_relu += m.relu_hits;
      n_sat  += m.sat_events;
      if (t > 0 && irq) n_clr_start++;     // done still set: the start clears it
      bus_write(REG_CTRL, 8'h01);          // taken at the rising edge inside
      cyc = 0;
      check(int'(irq), 0, "irq low after start");
      if (t % 3 == 1) begin
        bus_write(REG_CTRL, 8'h01);        // while busy: must be rejected
        cyc += 2;
        bus_read(REG_STATUS, d);
        cyc += 2;
        check(int'(d[2:0]), 3'b101, "status busy + rejected");
        n_reject += int'(d[2]);
        bus_write(REG_STATUS, 8'h04);
        cyc += 2;
      end
      while (!irq && cyc < 20000) begin
        @(negedge clk);
        cyc++;
      end
      // cyc counts rising edges after the one that took the CTRL write
      check(cyc, LAT, "CTRL write to irq latency");
      checks++;
      if (cyc > 10000) begin failures++; $display("FAIL over 10 kHz real-time budget"); end
      bus_read(REG_STATUS, d); check(int'(d[2:0]), 3'b010, "status done");
      for (int k = 0; k < K; k++) begin
        bus_read(REG_Y_BASE + 8'(k), d);
        check(int'($signed(d)), m.y[k], $sformatf("inference %0d y%0d", t, k));
      end
      if (t % 2 == 0) begin
        bus_write(REG_STATUS, 8'h02);
        @(negedge clk);
        check(int'(irq), 0, "done cleared by write-1");
        n_w1c++;
      end
    end
    $display("mechanisms: relu clamps %0d, saturations %0d, rejected starts %0d, done cleared by write-1 %0d, by start %0d",
             n_relu, n_sat, n_reject, n_w1c, n_clr_start);
    $display("latency: %0d cycles from CTRL write to irq (%0.2f us at 100 MHz)", LAT, LAT / 100.0);
    checks += 5;
    if (n_relu == 0)      begin failures++; $display("FAIL no ReLU clamp"); end
    if (n_sat == 0)       begin failures++; $display("FAIL no saturation"); end
    if (n_reject == 0)    begin failures++; $display("FAIL no rejected start"); end
    if (n_w1c == 0)       begin failures++; $display("FAIL no write-1 clear"); end
    if (n_clr_start == 0) begin failures++; $display("FAIL no clear by start"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
