// tb_act_buffer -- self-checking test of the activation register file.
//
// Random writes and reads (both in the same cycle as well) against a shadow
// array; a read in the cycle of a write to the same address must return the
// old value (write takes effect at the clock edge). Out-of-range reads give 0.
module tb_act_buffer;
  localparam int D = 120;
  logic clk = 0, we = 0;
  logic [6:0] waddr = '0, raddr = '0;
  logic [7:0] wdata = '0, rdata;
  int shadow [D];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  act_buffer #(.DEPTH(D), .WIDTH(8)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < D; i++) begin
      shadow[i] = (i * 37 + 11) % 256;
      we <= 1; waddr <= 7'(i); wdata <= 8'(shadow[i]);
      @(posedge clk);
    end
    we <= 0;
    @(negedge clk);
    for (int i = 0; i < 128; i++) begin
      raddr = 7'(i);
      #1;
      check(int'(rdata), (i < D) ? shadow[i] : 0, "read after fill");
    end
    for (int t = 0; t < 2000; t++) begin
      int wa, ra, wd;
      bit w;
      @(negedge clk);
      w = $urandom_range(1) == 1;
      wa = $urandom_range(D - 1);
      ra = (t % 4 == 0) ? wa : $urandom_range(D - 1);
      wd = $urandom_range(255);
      we = w; waddr = 7'(wa); wdata = 8'(wd); raddr = 7'(ra);
      #1;
      check(int'(rdata), shadow[ra], "read before edge");
      @(posedge clk);
      if (w) shadow[wa] = wd;
      #1;
      check(int'(rdata), shadow[ra], "read after edge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
