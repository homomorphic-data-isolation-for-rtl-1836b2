// tb_mod_adder: self-checking test of the modular adder.
// Random addends below d for several moduli, including d = 693 (the CRT
// product) and corner cases a + b = d - 1, d, 2d - 2.
module tb_mod_adder;

  localparam int unsigned W = 10;

  logic [W-1:0] a, b, d, s;

  int checks = 0, failures = 0;

  mod_adder dut (.*);

  task automatic run(int unsigned ai, int unsigned bi, int unsigned di);
    a = W'(ai); b = W'(bi); d = W'(di);
    #1;
    checks++;
    if (int'(s) != (ai + bi) % di) begin
      failures++;
      $display("FAIL (%0d + %0d) mod %0d = %0d", ai, bi, di, s);
    end
  endtask

  initial begin
    int unsigned mods [4] = '{693, 1023, 5, 512};
    run(0, 0, 693);
    run(692, 0, 693);
    run(692, 1, 693);
    run(692, 692, 693);
    run(1022, 1022, 1023);
    for (int i = 0; i < 2000; i++) begin
      int unsigned di;
      di = mods[i % 4];
      run($urandom % di, $urandom % di, di);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
