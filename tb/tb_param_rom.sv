// tb_param_rom -- self-checking test of the parameter ROM.
//
// One instance uses the built-in placeholder contents (seed 5, 37 words): every
// word is compared with the independently computed tb_ref_pkg::ref_word().
// A second instance is filled from tb/rom_test.mem (8 words listed below) and
// checked against those values. Reads past DEPTH must return 0.
module tb_param_rom;
  import softsensor_pkg::*;
  import tb_ref_pkg::*;

  localparam int D1 = 37;
  localparam int D2 = 8;
  logic [5:0] addr1;
  logic [2:0] addr2;
  logic [7:0] data1, data2;
  int checks = 0, failures = 0;
  int file_words [D2] = '{8'h05, 8'h7f, 8'h80, 8'hff, 8'h10, 8'hf0, 8'h3c, 8'hc4};

  param_rom #(.DEPTH(D1), .WIDTH(8), .SEED(5)) dut_gen (.addr(addr1), .data(data1));
  param_rom #(.DEPTH(D2), .WIDTH(8), .SEED(9), .INIT_FILE("tb/rom_test.mem"))
    dut_file (.addr(addr2), .data(data2));

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1;
    for (int i = 0; i < 64; i++) begin
      addr1 = 6'(i);
      #1;
      check(int'($signed(data1)), (i < D1) ? ref_word(5, i) : 0, $sformatf("generated word %0d", i));
    end
    for (int i = 0; i < D2; i++) begin
      addr2 = 3'(i);
      #1;
      check(int'(data2), file_words[i], $sformatf("file word %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
