// tb_mod_div: self-checking test of the plus-minus modular divider.
// Random dividends and non-zero divisors over several primes, plus corner
// cases (x = 0, y = 1, y = m-1). The quotient is checked against
// x * y^(m-2) mod m (Fermat inverse) and the latency against the step bound
// 3K+3.
module tb_mod_div;
  import tb_ref_pkg::*;

  localparam int unsigned K = 8;

  logic         clock = 1'b0;
  logic         reset = 1'b1;
  logic         start = 1'b0;
  logic [K-1:0] x = '0, y = 8'd1, m = 8'd251, z;
  logic         done;

  int checks = 0, failures = 0, max_cyc = 0;

  mod_div dut (.*);

  always #5 clock = ~clock;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic run(logic [K-1:0] xi, logic [K-1:0] yi, logic [K-1:0] mi);
    int cyc;
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
    exp_z = mulmod(xi, invmod(yi, mi), mi);
    check(z == K'(exp_z), $sformatf("%0d/%0d mod %0d = %0d, expected %0d", xi, yi, mi, z, exp_z));
    check(cyc <= 3 * K + 3, $sformatf("latency %0d above bound %0d", cyc, 3 * K + 3));
    if (cyc > max_cyc) max_cyc = cyc;
  endtask

  initial begin
    repeat (3) @(negedge clock);
    reset = 1'b0;
    run(8'd0, 8'd5, 8'd251);
    run(8'd17, 8'd1, 8'd251);
    run(8'd17, 8'd250, 8'd251);
    run(8'd1, 8'd2, 8'd3);
    run(8'd2, 8'd2, 8'd3);
    for (int i = 0; i < 600; i++) begin
      logic [K-1:0] mi;
      mi = K'(prime8(i));
      run(K'($urandom % mi), K'(1 + $urandom % (mi - 1)), mi);
    end
    $display("longest division: %0d cycles", max_cyc);
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
