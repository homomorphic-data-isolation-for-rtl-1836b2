// tb_dual_encrypt: self-checking test of the dual-mode encryptor.
// With n = 251, g = 6 and random secret keys, random messages are encrypted
// in both modes and every ciphertext word is compared with the reference:
//   multiplicative: C1 = g^l, C2 = h^l * m (mod n)
//   additive:       C1_i = g^l_i, C2_i = h^l_i * g^(m mod d_i) (mod n).
// The latency of each mode is constant and is checked against LAT_MUL and
// LAT_ADD. Both select values are counted and must each occur.
module tb_dual_encrypt;
  import elgamal_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned K = 8;
  localparam int unsigned EXP = (K + 2) * (K + 3) + 1;   // exponentiator
  localparam int unsigned MM  = K + 3;                   // one product
  localparam int unsigned LAT_MUL = 1 + (EXP + 1) + 2 * MM;
  localparam int unsigned LAT_ADD = 1 + (K + 2) + T * ((EXP + 1) + 2 * MM);

  logic         clock = 1'b0;
  logic         reset = 1'b1;
  logic         start = 1'b0;
  mode_e        select = MODE_MUL;
  logic [K-1:0] g = 8'd6, h = '0, n = 8'd251, one_n, r2_n, m = '0;
  logic [K-1:0] l  [T];
  logic [K-1:0] c1 [T];
  logic [K-1:0] c2 [T];
  logic         done;

  int checks = 0, failures = 0, n_mul = 0, n_add = 0;

  dual_encrypt dut (.*);

  always #5 clock = ~clock;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic run(mode_e sel, logic [K-1:0] mi, logic [K-1:0] ki);
    int cyc;
    @(negedge clock);
    select = sel;
    m = mi;
    h = K'(powmod(g, ki, n));
    for (int i = 0; i < T; i++) l[i] = K'(1 + $urandom % (n - 2));
    start = 1'b1;
    @(negedge clock);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clock);
      cyc++;
    end
    if (sel == MODE_MUL) begin
      n_mul++;
      check(c1[0] == K'(powmod(g, l[0], n)), $sformatf("MUL C1 = %0d", c1[0]));
      check(c2[0] == K'(mulmod(powmod(h, l[0], n), mi, n)), $sformatf("MUL C2 = %0d", c2[0]));
      check(cyc == LAT_MUL, $sformatf("MUL latency %0d, expected %0d", cyc, LAT_MUL));
    end else begin
      n_add++;
      for (int i = 0; i < T; i++) begin
        check(c1[i] == K'(powmod(g, l[i], n)), $sformatf("ADD C1_%0d = %0d", i, c1[i]));
        check(c2[i] == K'(mulmod(powmod(h, l[i], n), powmod(g, mi % D_LIST[i], n), n)),
              $sformatf("ADD C2_%0d = %0d (m = %0d)", i, c2[i], mi));
      end
      check(cyc == LAT_ADD, $sformatf("ADD latency %0d, expected %0d", cyc, LAT_ADD));
    end
  endtask

  initial begin
    one_n = K'((longint'(1) << K) % n);
    r2_n  = K'((longint'(1) << (2 * K)) % n);
    for (int i = 0; i < T; i++) l[i] = '0;
    repeat (3) @(negedge clock);
    reset = 1'b0;
    run(MODE_MUL, 8'd1, 8'd5);
    run(MODE_ADD, 8'd0, 8'd5);
    run(MODE_ADD, 8'd250, 8'd77);
    for (int j = 0; j < 30; j++)
      run((j % 2 == 0) ? MODE_MUL : MODE_ADD, K'(1 + $urandom % 250), K'(1 + $urandom % 249));
    check(n_mul > 0 && n_add > 0, "both modes exercised");
    $display("multiplicative encryptions %0d, additive encryptions %0d", n_mul, n_add);
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
