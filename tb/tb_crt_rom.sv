// tb_crt_rom: self-checking test of the inverse-CRT weight memory.
// Each weight w_i must be 1 mod d_i and 0 mod every other d_j (which is what
// makes sum c_i*w_i mod d reconstruct a number from its residues); the test
// also checks the one-cycle synchronous read and reconstructs all values
// below d from their residues with the stored weights.
module tb_crt_rom;
  import elgamal_pkg::*;

  logic                 clock = 1'b0;
  logic [$clog2(T)-1:0] addr = '0;
  logic [DW-1:0]        data;

  int checks = 0, failures = 0;
  int unsigned w [T];

  crt_rom dut (.*);

  always #5 clock = ~clock;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int i = 0; i < T; i++) begin
      @(negedge clock);
      addr = i[$clog2(T)-1:0];
      @(negedge clock);
      w[i] = data;
      for (int j = 0; j < T; j++)
        check((w[i] % D_LIST[j]) == ((i == j) ? 1 : 0),
              $sformatf("w[%0d] = %0d mod d_%0d", i, w[i], j));
      check(w[i] < D, $sformatf("w[%0d] = %0d not below %0d", i, w[i], D));
    end
    for (int unsigned v = 0; v < D; v++) begin
      longint unsigned acc;
      acc = 0;
      for (int i = 0; i < T; i++) acc += longint'(v % D_LIST[i]) * w[i];
      check((acc % D) == v, $sformatf("CRT of %0d gives %0d", v, acc % D));
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
