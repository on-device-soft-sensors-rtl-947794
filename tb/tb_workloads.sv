// tb_workloads -- the four evaluated network sizes, 3-10-1, 3-30-1, 3-60-1 and
// 3-120-1, each run end to end through the register interface.
//
// One soft_sensor_top per size is built with N_HIDDEN_P set accordingly. Each
// runs 25 inferences on random Q4.4 sensor samples; results are compared with
// the reference MLP, and the CTRL-write-to-irq time must equal the schedule,
// 1 + H*(N+1)+1 + K*(H+1)+1 cycles. For each size the testbench prints that
// time at an assumed 100 MHz clock next to the FPGA inference times reported
// for the trained models (1.04, 3.04, 6.04, 12.04 us), checks that it is not
// longer than them, and checks it against the real-time limit of one sample
// period at 10 kHz (100 us).
module tb_workloads;
  import softsensor_pkg::*;
  import tb_ref_pkg::*;

  localparam int NW = 4;
  localparam int HS [NW] = '{10, 30, 60, 120};
  localparam real PAPER_US [NW] = '{1.04, 3.04, 6.04, 12.04};

  logic clk = 0, rst_n = 0;
  logic [7:0] addr = '0, wdata = '0;
  logic [7:0] rdata [NW];
  logic we [NW], re [NW];
  logic irq [NW];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar w = 0; w < NW; w++) begin : g_top
    soft_sensor_top #(.N_SENSORS_P(3), .N_HIDDEN_P(HS[w]), .K_OUT_P(1)) dut (
      .clk, .rst_n, .bus_addr(addr), .bus_wdata(wdata), .bus_we(we[w]), .bus_re(re[w]),
      .bus_rdata(rdata[w]), .irq(irq[w]));
  end

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic bus_write(int w, logic [7:0] a, logic [7:0] d);
    @(negedge clk);
    addr = a; wdata = d; we[w] = 1;
    @(negedge clk);
    we[w] = 0;
  endtask

  task automatic bus_read(int w, logic [7:0] a, output logic [7:0] d);
    @(negedge clk);
    addr = a; re[w] = 1;
    @(negedge clk);
    re[w] = 0;
    d = rdata[w];
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
    int xv[], cyc, lat;
    xv = new[3];
    for (int w = 0; w < NW; w++) begin we[w] = 0; re[w] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int w = 0; w < NW; w++) begin
      m = new(3, HS[w], 1);
      lat = 1 + HS[w]*4 + 1 + (HS[w] + 1) + 1;
      bus_read(w, REG_CFG_H, d);
      check(int'(d), HS[w], "configured hidden size");
      for (int t = 0; t < 25; t++) begin
        for (int i = 0; i < 3; i++) begin
          xv[i] = $urandom_range(127) - 64;
          bus_write(w, REG_X_BASE + 8'(i), 8'(xv[i]));
        end
        m.run(xv);
        bus_write(w, REG_CTRL, 8'h01);
        cyc = 0;
        while (!irq[w] && cyc < 20000) begin
          @(negedge clk);
          cyc++;
        end
        check(cyc, lat, "CTRL write to irq latency");
        bus_read(w, REG_Y_BASE, d);
        check(int'($signed(d)), m.y[0], $sformatf("3-%0d-1 result", HS[w]));
        bus_write(w, REG_STATUS, 8'h02);
      end
      $display("3-%0d-1: %0d cycles = %0.2f us at 100 MHz; reported FPGA time %0.2f us; budget 100 us",
               HS[w], lat, lat / 100.0, PAPER_US[w]);
      checks += 2;
      if (lat / 100.0 > PAPER_US[w]) begin failures++; $display("FAIL slower than reported"); end
      if (lat > 10000) begin failures++; $display("FAIL over real-time budget"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
