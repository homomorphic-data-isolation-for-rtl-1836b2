// tb_dual_decrypt: self-checking test of the dual-mode decryptor.
// Ciphertexts are formed here with the reference arithmetic (n = 251, g = 6,
// random secret k and random exponents) and decrypted:
//   - multiplicative mode, single messages and products of two ciphertexts
//     (pairwise product of C1 and C2), which must decrypt to m1*m2 mod n;
//   - additive mode, single messages and products of two ciphertexts, which
//     must decrypt to m1+m2 (below d = 693 for 8-bit messages).
// The multiplicative latency varies only with the divider; in additive mode the
// latency depends on the discrete logarithms; both are checked against the
// fixed part predicted from the exponents e_i (one Montgomery product per
// logarithm step, one addition per CRT step) plus the divider's step range.
module tb_dual_decrypt;
  import elgamal_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned K = 8;
  localparam int unsigned EXP = (K + 2) * (K + 3) + 1;
  localparam int unsigned MM  = K + 3;

  logic          clock = 1'b0;
  logic          reset = 1'b1;
  logic          start = 1'b0;
  mode_e         select = MODE_MUL;
  logic [K-1:0]  g = 8'd6, n = 8'd251, one_n, r2_n, k = 8'd1;
  logic [K-1:0]  c1 [T];
  logic [K-1:0]  c2 [T];
  logic [MW-1:0] m;
  logic          done;

  int checks = 0, failures = 0, n_mul = 0, n_add = 0, n_hom = 0;

  dual_decrypt dut (.*);

  always #5 clock = ~clock;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Encrypts message mi in the given mode into ca/cb (reference arithmetic).
  task automatic encrypt(mode_e sel, int unsigned mi, output logic [K-1:0] ca [T],
                         output logic [K-1:0] cb [T]);
    longint unsigned hk = powmod(g, k, n);
    for (int i = 0; i < T; i++) begin
      longint unsigned li = 1 + $urandom % (n - 2);
      ca[i] = K'(powmod(g, li, n));
      if (sel == MODE_MUL) cb[i] = K'(mulmod(powmod(hk, li, n), mi, n));
      else                 cb[i] = K'(mulmod(powmod(hk, li, n), powmod(g, mi % D_LIST[i], n), n));
    end
  endtask

  // Decrypts c1/c2 with the DUT and checks the result and the cycle count.
  task automatic run(mode_e sel, int unsigned expect_m, int unsigned exps [T]);
    int cyc;
    int lat;
    @(negedge clock);
    select = sel;
    start = 1'b1;
    @(negedge clock);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clock);
      cyc++;
    end
    // Fixed part of the latency; the divider adds 3..3K+4 cycles per pair.
    if (sel == MODE_MUL) begin
      n_mul++;
      lat = 1 + (EXP + 1);
      check(cyc >= lat + 3 && cyc <= lat + 3 * K + 4,
            $sformatf("MUL latency %0d outside [%0d, %0d]", cyc, lat + 3, lat + 3 * K + 4));
    end else begin
      n_add++;
      lat = 1 + MM;
      for (int i = 0; i < T; i++) lat += (EXP + 1) + exps[i] * MM + 1 + (exps[i] + 1) + 1;
      check(cyc >= lat + 3 * T && cyc <= lat + T * (3 * K + 4),
            $sformatf("ADD latency %0d outside [%0d, %0d]", cyc, lat + 3 * T, lat + T * (3 * K + 4)));
    end
    $display("%s latency %0d (fixed part %0d)", sel == MODE_MUL ? "MUL" : "ADD", cyc, lat);
    check(int'(m) == int'(expect_m), $sformatf("%s decrypts to %0d, expected %0d",
          sel == MODE_MUL ? "MUL" : "ADD", m, expect_m));
  endtask

  initial begin
    logic [K-1:0] a1 [T], a2 [T], b1 [T], b2 [T];
    int unsigned e [T];
    one_n = K'((longint'(1) << K) % n);
    r2_n  = K'((longint'(1) << (2 * K)) % n);
    for (int i = 0; i < T; i++) begin
      c1[i] = '0;
      c2[i] = '0;
      e[i]  = 0;
    end
    repeat (3) @(negedge clock);
    reset = 1'b0;
    for (int j = 0; j < 24; j++) begin
      int unsigned ma, mb;
      k  = K'(1 + $urandom % 249);
      ma = 1 + $urandom % 250;
      mb = 1 + $urandom % 250;
      // Multiplicative: single and homomorphic product.
      encrypt(MODE_MUL, ma, a1, a2);
      encrypt(MODE_MUL, mb, b1, b2);
      c1 = a1; c2 = a2;
      run(MODE_MUL, ma, e);
      for (int i = 0; i < T; i++) begin
        c1[i] = K'(mulmod(a1[i], b1[i], n));
        c2[i] = K'(mulmod(a2[i], b2[i], n));
      end
      run(MODE_MUL, (ma * mb) % n, e);
      n_hom++;
      // Additive: single and homomorphic sum.
      encrypt(MODE_ADD, ma, a1, a2);
      encrypt(MODE_ADD, mb, b1, b2);
      c1 = a1; c2 = a2;
      for (int i = 0; i < T; i++) e[i] = ma % D_LIST[i];
      run(MODE_ADD, ma, e);
      for (int i = 0; i < T; i++) begin
        c1[i] = K'(mulmod(a1[i], b1[i], n));
        c2[i] = K'(mulmod(a2[i], b2[i], n));
        e[i]  = ma % D_LIST[i] + mb % D_LIST[i];
      end
      run(MODE_ADD, (ma + mb) % D, e);
      n_hom++;
    end
    check(n_mul > 0 && n_add > 0 && n_hom > 0, "both modes and homomorphic operations exercised");
    $display("multiplicative %0d, additive %0d, homomorphic %0d", n_mul, n_add, n_hom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
