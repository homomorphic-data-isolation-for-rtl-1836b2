// tb_mod_reducer: self-checking test of the CRT residue reducer.
// Every 8-bit message is reduced and each residue compared with m % d_i; the
// latency is checked to be K+1 cycles from the start edge to done.
module tb_mod_reducer;
  import elgamal_pkg::*;

  localparam int unsigned K = 8;

  logic          clock = 1'b0;
  logic          reset = 1'b1;
  logic          start = 1'b0;
  logic [K-1:0]  m = '0;
  logic [RW-1:0] r [T];
  logic          done;

  int checks = 0, failures = 0;

  mod_reducer dut (.*);

  always #5 clock = ~clock;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (3) @(negedge clock);
    reset = 1'b0;
    for (int v = 0; v < (1 << K); v++) begin
      int cyc;
      @(negedge clock);
      m = K'(v); start = 1'b1;
      @(negedge clock);
      start = 1'b0;
      cyc = 1;
      while (!done) begin
        @(negedge clock);
        cyc++;
      end
      for (int i = 0; i < T; i++)
        check(int'(r[i]) == v % int'(D_LIST[i]),
              $sformatf("%0d mod %0d = %0d", v, D_LIST[i], r[i]));
      check(cyc == K + 1, $sformatf("latency %0d, expected %0d", cyc, K + 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
