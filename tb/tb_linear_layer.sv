// tb_linear_layer -- self-checking test of the sequential fully connected layer.
//
// Two layers: 3 -> 7 with ReLU (hidden-layer shape) and 9 -> 2 linear
// (output-layer shape, different seeds). The testbench holds each input vector
// in an array and answers in_addr combinationally, collects every out_we
// write, and compares the written vector with the integer reference neuron
// over the placeholder weights. Checks per pass: each output value, that each
// neuron is written exactly once, and that done arrives exactly
// OUT*(IN+1)+1 cycles after start, with busy high throughout.
module tb_linear_layer;
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

  // layer A: 3 -> 7, ReLU, seeds 1/2
  localparam int IA = 3, OA = 7;
  logic sa = 0, busy_a, done_a, we_a;
  logic [1:0] ia_addr;
  logic [2:0] oa_addr;
  fxp_t da, xa [IA];
  fxp_t outa;
  linear_layer #(.IN(IA), .OUT(OA), .ACT(ACT_RELU), .W_SEED(1), .B_SEED(2)) dut_a (
    .clk, .rst_n, .start(sa), .busy(busy_a), .done(done_a), .in_addr(ia_addr),
    .in_data(da), .out_we(we_a), .out_addr(oa_addr), .out_data(outa));
  assign da = (ia_addr < IA) ? xa[ia_addr] : '0;

  // layer B: 9 -> 2, linear, seeds 7/8
  localparam int IB = 9, OB = 2;
  logic sb = 0, busy_b, done_b, we_b;
  logic [3:0] ib_addr;
  logic       ob_addr;
  fxp_t db, xb [IB];
  fxp_t outb;
  linear_layer #(.IN(IB), .OUT(OB), .ACT(ACT_NONE), .W_SEED(7), .B_SEED(8)) dut_b (
    .clk, .rst_n, .start(sb), .busy(busy_b), .done(done_b), .in_addr(ib_addr),
    .in_data(db), .out_we(we_b), .out_addr(ob_addr), .out_data(outb));
  assign db = (ib_addr < IB) ? xb[ib_addr] : '0;

  int got_a [OA], wr_a [OA];
  int got_b [OB], wr_b [OB];
  always @(posedge clk) begin
    if (we_a) begin got_a[oa_addr] <= int'(outa); wr_a[oa_addr] <= wr_a[oa_addr] + 1; end
    if (we_b) begin got_b[ob_addr] <= int'(outb); wr_b[ob_addr] <= wr_b[ob_addr] + 1; end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xs[], ws[], cyc, relu_hits;
    bit shi, slo, rh;
    bit busy_ok;
    relu_hits = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 60; t++) begin
      // ---- layer A ----
      for (int i = 0; i < IA; i++) xa[i] = fxp_t'($urandom_range(255) - 128);
      for (int o = 0; o < OA; o++) wr_a[o] = 0;
      sa <= 1; @(posedge clk); sa <= 0;
      cyc = 0; busy_ok = 1;
      while (1) begin
        @(posedge clk); cyc++;
        if (!busy_a) busy_ok = 0;
        if (done_a) break;
        if (cyc > 1000) break;
      end
      check(cyc, OA*(IA+1)+1, "layer A latency");
      check(int'(busy_ok), 1, "layer A busy");
      xs = new[IA]; ws = new[IA];
      for (int o = 0; o < OA; o++) begin
        for (int i = 0; i < IA; i++) begin xs[i] = int'(xa[i]); ws[i] = ref_word(1, o*IA + i); end
        check(got_a[o], ref_neuron(xs, ws, ref_word(2, o), 1'b1, shi, slo, rh), "layer A output");
        relu_hits += int'(rh);
        check(wr_a[o], 1, "layer A one write per neuron");
      end
      // ---- layer B ----
      for (int i = 0; i < IB; i++) xb[i] = fxp_t'($urandom_range(255) - 128);
      for (int o = 0; o < OB; o++) wr_b[o] = 0;
      sb <= 1; @(posedge clk); sb <= 0;
      cyc = 0;
      while (1) begin
        @(posedge clk); cyc++;
        if (done_b) break;
        if (cyc > 1000) break;
      end
      check(cyc, OB*(IB+1)+1, "layer B latency");
      xs = new[IB]; ws = new[IB];
      for (int o = 0; o < OB; o++) begin
        for (int i = 0; i < IB; i++) begin xs[i] = int'(xb[i]); ws[i] = ref_word(7, o*IB + i); end
        check(got_b[o], ref_neuron(xs, ws, ref_word(8, o), 1'b0, shi, slo, rh), "layer B output");
        check(wr_b[o], 1, "layer B one write per neuron");
      end
      @(posedge clk);
      check(int'(busy_a || busy_b), 0, "idle after done");
    end
    checks++;
    if (relu_hits == 0) begin failures++; $display("FAIL no ReLU clamp exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
