// tb_mont_exp: self-checking test of the LSB-first Montgomery exponentiator.
// Random bases and exponents over several odd moduli; the result is compared
// with square-and-multiply from the reference package. The Montgomery
// constants 2^K mod m and 2^2K mod m are computed here with the % operator.
// The latency, independent of the operands, is checked to be
// (K+2)*(K+3)+1 cycles from the start edge to done.
module tb_mont_exp;
  import tb_ref_pkg::*;

  localparam int unsigned K = 8;
  localparam int unsigned LAT = (K + 2) * (K + 3) + 1;

  logic         clock = 1'b0;
  logic         reset = 1'b1;
  logic         start = 1'b0;
  logic [K-1:0] y = '0, x = '0, m = 8'd251, one_m = '0, r2_m = '0, z;
  logic         done;

  int checks = 0, failures = 0;

  mont_exp dut (.*);

  always #5 clock = ~clock;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic run(logic [K-1:0] yi, logic [K-1:0] xi, logic [K-1:0] mi);
    int cyc;
    longint unsigned exp_z;
    @(negedge clock);
    y = yi; x = xi; m = mi;
    one_m = K'((longint'(1) << K) % mi);
    r2_m  = K'((longint'(1) << (2 * K)) % mi);
    start = 1'b1;
    @(negedge clock);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clock);
      cyc++;
    end
    exp_z = powmod(yi, xi, mi);
    check(z == K'(exp_z), $sformatf("%0d^%0d mod %0d = %0d, expected %0d", yi, xi, mi, z, exp_z));
    check(cyc == LAT, $sformatf("latency %0d, expected %0d", cyc, LAT));
  endtask

  initial begin
    repeat (3) @(negedge clock);
    reset = 1'b0;
    run(8'd6, 8'd0, 8'd251);
    run(8'd6, 8'd1, 8'd251);
    run(8'd6, 8'd255, 8'd251);
    run(8'd250, 8'd250, 8'd251);
    run(8'd2, 8'd7, 8'd3);
    for (int i = 0; i < 120; i++) begin
      logic [K-1:0] mi;
      mi = K'(prime8(i));
      run(K'($urandom % mi), K'($urandom), mi);
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
