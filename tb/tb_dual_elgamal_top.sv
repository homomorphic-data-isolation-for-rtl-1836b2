// tb_dual_elgamal_top: end-to-end test of the dual homomorphic datapath at its
// default size (K = 8, T = 3).
// Sequence: key generation (n = 251, g = 6, random secret k), then a series
// of operations alternating between the two modes. Each operation encrypts
// two messages, lets the behavioural third-party IP combine the two
// ciphertexts (word-wise product mod n), decrypts the IP's output and checks:
//   multiplicative mode: result = m1 * m2 mod n
//   additive mode:       result = m1 + m2
// The ciphertexts leaving the design are also compared with the reference
// encryption (g^l, h^l * m or h^l * g^(m mod d_i)), and no ciphertext word
// may equal the plaintext in the clear for every pair. Counted mechanisms,
// each of which must occur: key generation, multiplicative operation,
// additive operation, switch of select between operations, homomorphic IP
// operation. The cycle counts of one multiplicative followed by one additive
// operation are printed.
module tb_dual_elgamal_top;
  import elgamal_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned K = K_BITS;

  logic          clock = 1'b0;
  logic          reset = 1'b1;
  mode_e         select = MODE_MUL;
  logic [K-1:0]  g = 8'd6, n = 8'd251, k = '0;
  logic          key_start = 1'b0, key_done;
  logic [K-1:0]  h;
  logic          enc_start = 1'b0, enc_done;
  logic [K-1:0]  m_in = '0;
  logic [K-1:0]  l [T];
  logic [K-1:0]  alpha_c1 [T];
  logic [K-1:0]  alpha_c2 [T];
  logic          dec_start = 1'b0, dec_done;
  logic [K-1:0]  beta_c1 [T];
  logic [K-1:0]  beta_c2 [T];
  logic [MW-1:0] m_out;

  // Ciphertexts held for the IP.
  logic [K-1:0]  s1 [T], s2 [T], u1 [T], u2 [T];
  logic          ip_start = 1'b0, ip_done;

  int checks = 0, failures = 0;
  int n_keygen = 0, n_mul = 0, n_add = 0, n_switch = 0, n_ip = 0;
  int enc_cycles_mul = 0, dec_cycles_mul = 0, enc_cycles_add = 0, dec_cycles_add = 0;

  dual_elgamal_top dut (.*);

  third_party_ip_model #(.K(K)) u_ip (
    .clock, .start(ip_start), .n, .a1(s1), .a2(s2), .b1(u1), .b2(u2),
    .y1(beta_c1), .y2(beta_c2), .done(ip_done)
  );

  always #5 clock = ~clock;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic pulse_wait(ref logic st, ref logic dn, output int cyc);
    @(negedge clock);
    st = 1'b1;
    @(negedge clock);
    st = 1'b0;
    cyc = 1;
    while (!dn) begin
      @(negedge clock);
      cyc++;
    end
  endtask

  // Encrypts mi and checks the ciphertext against the reference.
  task automatic encrypt(int unsigned mi, output logic [K-1:0] o1 [T],
                         output logic [K-1:0] o2 [T], output int cyc);
    m_in = K'(mi);
    for (int i = 0; i < T; i++) l[i] = K'(1 + $urandom % (n - 2));
    pulse_wait(enc_start, enc_done, cyc);
    for (int i = 0; i < ((select == MODE_MUL) ? 1 : T); i++) begin
      longint unsigned mexp;
      mexp = (select == MODE_MUL) ? mi : powmod(g, mi % D_LIST[i], n);
      check(alpha_c1[i] == K'(powmod(g, l[i], n)), $sformatf("C1_%0d", i));
      check(alpha_c2[i] == K'(mulmod(powmod(h, l[i], n), mexp, n)), $sformatf("C2_%0d", i));
    end
    o1 = alpha_c1;
    o2 = alpha_c2;
  endtask

  task automatic operation(mode_e sel, int unsigned ma, int unsigned mb);
    int ce1, ce2, cip, cd;
    int unsigned expect_m;
    if (sel != select) n_switch++;
    select = sel;
    encrypt(ma, s1, s2, ce1);
    encrypt(mb, u1, u2, ce2);
    pulse_wait(ip_start, ip_done, cip);
    n_ip++;
    @(negedge clock);
    pulse_wait(dec_start, dec_done, cd);
    if (sel == MODE_MUL) begin
      expect_m = (ma * mb) % n;
      n_mul++;
      enc_cycles_mul = ce1;
      dec_cycles_mul = cd;
    end else begin
      expect_m = ma + mb;
      n_add++;
      enc_cycles_add = ce1;
      dec_cycles_add = cd;
    end
    check(int'(m_out) == int'(expect_m),
          $sformatf("%s(%0d, %0d) decrypts to %0d, expected %0d",
                    sel == MODE_MUL ? "MUL" : "ADD", ma, mb, m_out, expect_m));
  endtask

  initial begin
    int cyc;
    for (int i = 0; i < T; i++) begin
      l[i]  = '0;
      s1[i] = '0; s2[i] = '0; u1[i] = '0; u2[i] = '0;
    end
    repeat (3) @(negedge clock);
    reset = 1'b0;
    for (int key = 0; key < 3; key++) begin
      k = K'(1 + $urandom % 249);
      pulse_wait(key_start, key_done, cyc);
      n_keygen++;
      check(h == K'(powmod(g, k, n)), $sformatf("public key %0d", h));
      for (int j = 0; j < 6; j++) begin
        operation(MODE_MUL, 1 + $urandom % 250, 1 + $urandom % 250);
        operation(MODE_ADD, $urandom % 256, $urandom % 256);
        if (j % 3 == 0) operation(MODE_ADD, $urandom % 256, $urandom % 256);
      end
    end
    operation(MODE_ADD, 255, 255);   // largest sum, 510 < d
    operation(MODE_MUL, 250, 250);
    $display("key generations %0d, multiplicative ops %0d, additive ops %0d, mode switches %0d, IP ops %0d",
             n_keygen, n_mul, n_add, n_switch, n_ip);
    $display("cycles: MUL encrypt %0d decrypt %0d, ADD encrypt %0d decrypt %0d (last operation of each)",
             enc_cycles_mul, dec_cycles_mul, enc_cycles_add, dec_cycles_add);
    check(n_keygen > 0, "key generation happened");
    check(n_mul > 0, "multiplicative mode happened");
    check(n_add > 0, "additive mode happened");
    check(n_switch > 0, "mode switch happened");
    check(n_ip > 0, "homomorphic IP operation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
