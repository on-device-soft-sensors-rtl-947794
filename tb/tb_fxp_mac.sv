// tb_fxp_mac -- self-checking test of the fixed-point MAC.
//
// Two MACs (ReLU and linear) get the same random product sequences of length
// 1..8 with random biases, including full-range operands that drive the
// requantised result into saturation. After each sequence the result is
// compared with the integer reference neuron from tb_ref_pkg. Also checks
// that the clear input restarts the sum and that en = 0 holds it.
module tb_fxp_mac;
  import softsensor_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  fxp_t a = '0, b = '0, bias = '0;
  fxp_t res_relu, res_lin;
  int checks = 0, failures = 0;
  int sat_seen = 0, relu_seen = 0;

  always #5 clk = ~clk;

  fxp_mac #(.ACT(ACT_RELU)) dut_relu (.clk, .rst_n, .clear, .en, .a, .b, .bias, .result(res_relu));
  fxp_mac #(.ACT(ACT_NONE)) dut_lin  (.clk, .rst_n, .clear, .en, .a, .b, .bias, .result(res_lin));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int xs[], ws[];
    int len, bv, e_relu, e_lin;
    bit shi, slo, rh;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 600; t++) begin
      len = 1 + $urandom_range(7);
      xs = new[len];
      ws = new[len];
      for (int i = 0; i < len; i++) begin
        if (t % 3 == 0) begin xs[i] = $urandom_range(255) - 128; ws[i] = $urandom_range(255) - 128; end
        else            begin xs[i] = $urandom_range(63) - 32;   ws[i] = $urandom_range(31) - 16;  end
      end
      bv = $urandom_range(255) - 128;
      for (int i = 0; i < len; i++) begin
        clear <= (i == 0);
        en    <= 1'b1;
        a     <= fxp_t'(xs[i]);
        b     <= fxp_t'(ws[i]);
        @(posedge clk);
      end
      en <= 1'b0; clear <= 1'b0;
      a <= fxp_t'($urandom); b <= fxp_t'($urandom);   // must be ignored with en = 0
      bias <= fxp_t'(bv);
      @(posedge clk);
      @(negedge clk);
      e_lin  = ref_neuron(xs, ws, bv, 1'b0, shi, slo, rh);
      sat_seen += int'(shi || slo);
      e_relu = ref_neuron(xs, ws, bv, 1'b1, shi, slo, rh);
      relu_seen += int'(rh);
      check(int'(res_lin), e_lin, "linear result");
      check(int'(res_relu), e_relu, "relu result");
    end
    checks++;
    if (sat_seen == 0 || relu_seen == 0) begin
      failures++;
      $display("FAIL coverage: saturation %0d relu %0d", sat_seen, relu_seen);
    end
    $display("saturated sums %0d, relu clamps %0d", sat_seen, relu_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
