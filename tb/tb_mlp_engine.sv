// tb_mlp_engine -- self-checking test of the two-layer inference engine.
//
// Engine 3 -> 10 -> 1 (the smallest evaluated network) and 3 -> 6 -> 2 (two
// outputs, to exercise the K-output path). Random Q4.4 input vectors, full
// range and small values; each result is compared with the reference MLP
// from tb_ref_pkg, and the start-to-done latency with
// H*(N+1)+1 + K*(H+1)+1 cycles. A start pulse during an inference must be
// ignored: the result must still be that of the first input vector.
module tb_mlp_engine;
  import softsensor_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  logic s1 = 0, busy1, done1;
  fxp_t x1 [3], y1 [1];
  mlp_engine #(.N_IN(3), .N_HID(10), .N_OUT(1)) dut1 (
    .clk, .rst_n, .start(s1), .x(x1), .busy(busy1), .done(done1), .y(y1));

  logic s2 = 0, busy2, done2;
  fxp_t x2 [3], y2 [2];
  mlp_engine #(.N_IN(3), .N_HID(6), .N_OUT(2)) dut2 (
    .clk, .rst_n, .start(s2), .x(x2), .busy(busy2), .done(done2), .y(y2));

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_mlp m1, m2;
    int xv[], cyc, ignored_starts;
    m1 = new(3, 10, 1);
    m2 = new(3, 6, 2);
    xv = new[3];
    ignored_starts = 0;
    for (int k = 0; k < 3; k++) begin x1[k] = '0; x2[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 200; t++) begin
      for (int k = 0; k < 3; k++) xv[k] = (t % 2) ? $urandom_range(255) - 128 : $urandom_range(63) - 32;
      for (int k = 0; k < 3; k++) begin x1[k] <= fxp_t'(xv[k]); x2[k] <= fxp_t'(xv[k]); end
      s1 <= 1; s2 <= 1;
      @(posedge clk);
      s1 <= 0; s2 <= 0;
      for (int k = 0; k < 3; k++) begin x1[k] <= fxp_t'($urandom); x2[k] <= fxp_t'($urandom); end
      m1.run(xv);
      m2.run(xv);
      cyc = 0;
      while (1) begin
        @(posedge clk); cyc++;
        if (cyc == 7 && (t % 5) == 0) begin s1 <= 1; ignored_starts++; end
        else s1 <= 0;
        if (done2) check(cyc, 6*4+1 + 2*7+1, "3-6-2 latency");
        if (done1) break;
        if (cyc > 5000) break;
      end
      s1 <= 0;
      check(cyc, 10*4+1 + 1*11+1, "3-10-1 latency");
      @(negedge clk);
      check(int'(y1[0]), m1.y[0], "3-10-1 y0");
      check(int'(y2[0]), m2.y[0], "3-6-2 y0");
      check(int'(y2[1]), m2.y[1], "3-6-2 y1");
      @(posedge clk);
      check(int'(busy1 || busy2), 0, "idle after done");
    end
    checks++;
    if (ignored_starts == 0) begin failures++; $display("FAIL start-while-busy never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
