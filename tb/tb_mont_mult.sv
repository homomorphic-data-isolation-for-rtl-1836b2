// tb_mont_mult: self-checking test of the Montgomery multiplier.
// Random operands over several odd moduli (primes and composites); the result
// is compared with x*y*2^-K mod m from the reference package, and the latency
// from the start edge to done is checked to be K+2 cycles.
module tb_mont_mult;
  import tb_ref_pkg::*;

  localparam int unsigned K = 8;

  logic         clock = 1'b0;
  logic         reset = 1'b1;
  logic         start = 1'b0;
  logic [K-1:0] x = '0, y = '0, m = 8'd251, z;
  logic         done;

  int checks = 0, failures = 0;

  mont_mult dut (.*);

  always #5 clock = ~clock;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic run(logic [K-1:0] xi, logic [K-1:0] yi, logic [K-1:0] mi);
    int cyc = 0;
    longint unsigned exp_z;
    @(negedge clock);
    x = xi; y = yi; m = mi; start = 1'b1;
    @(negedge clock);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clock);
      cyc++;
    end
    exp_z = montmod(xi, yi, mi, K);
    check(z == K'(exp_z), $sformatf("MM(%0d,%0d) mod %0d = %0d, expected %0d", xi, yi, mi, z, exp_z));
    check(cyc == K + 2, $sformatf("latency %0d, expected %0d", cyc, K + 2));
  endtask

  initial begin
    logic [K-1:0] mods [6] = '{8'd251, 8'd255, 8'd129, 8'd3, 8'd241, 8'd199};
    repeat (3) @(negedge clock);
    reset = 1'b0;
    // Corner cases.
    run(8'd0, 8'd0, 8'd251);
    run(8'd255, 8'd250, 8'd251);
    run(8'd250, 8'd250, 8'd251);
    run(8'd1, 8'd1, 8'd3);
    for (int i = 0; i < 300; i++) begin
      logic [K-1:0] mi;
      mi = mods[i % 6];
      run(K'($urandom), K'($urandom % mi), mi);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
