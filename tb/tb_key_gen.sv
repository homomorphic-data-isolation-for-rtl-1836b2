// tb_key_gen: self-checking test of key generation.
// For several primes n, generators g and random secret exponents k the
// public key h must equal g^k mod n, the Montgomery constants 2^K mod n and
// 2^2K mod n, and k_out the secret exponent. The latency is constant and is
// checked against LAT: 2K+1 doubling cycles, the exponentiation
// ((K+2)*(K+3)+1) and two cycles of hand-over.
module tb_key_gen;
  import tb_ref_pkg::*;

  localparam int unsigned K = 8;
  localparam int unsigned LAT = 2 * K + 1 + (K + 2) * (K + 3) + 1 + 2;

  logic         clock = 1'b0;
  logic         reset = 1'b1;
  logic         start = 1'b0;
  logic [K-1:0] g = 8'd6, n = 8'd251, k = 8'd1;
  logic [K-1:0] h, one_n, r2_n, k_out;
  logic         done;

  int checks = 0, failures = 0;

  key_gen dut (.*);

  always #5 clock = ~clock;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic run(logic [K-1:0] gi, logic [K-1:0] ni, logic [K-1:0] ki);
    int cyc;
    @(negedge clock);
    g = gi; n = ni; k = ki; start = 1'b1;
    @(negedge clock);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clock);
      cyc++;
    end
    check(h == K'(powmod(gi, ki, ni)), $sformatf("h = %0d for %0d^%0d mod %0d", h, gi, ki, ni));
    check(one_n == K'((longint'(1) << K) % ni), $sformatf("one_n = %0d mod %0d", one_n, ni));
    check(r2_n == K'((longint'(1) << (2 * K)) % ni), $sformatf("r2_n = %0d mod %0d", r2_n, ni));
    check(k_out == ki, "k_out");
    check(cyc == LAT, $sformatf("latency %0d, expected %0d", cyc, LAT));
  endtask

  initial begin
    repeat (3) @(negedge clock);
    reset = 1'b0;
    run(8'd6, 8'd251, 8'd0);
    run(8'd6, 8'd251, 8'd249);
    for (int i = 0; i < 40; i++) begin
      logic [K-1:0] ni;
      ni = K'(prime8(i));
      run(K'(2 + $urandom % (ni - 2)), ni, K'($urandom));
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
