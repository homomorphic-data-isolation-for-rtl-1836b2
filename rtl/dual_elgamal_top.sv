// dual_elgamal_top: homomorphic data isolation around an untrusted IP block.
//
// Data bound for a third-party IP is encrypted before it leaves the trusted
// logic and decrypted when the IP's result returns, so the IP only ever sees
// ciphertext. One select input switches the whole datapath between the
// multiplicative ElGamal scheme (the IP may multiply ciphertexts) and the
// additive CRT-based ElGamal scheme (the IP may multiply ciphertexts to add
// the messages). The top holds the three trusted modules of the dual-circuit
// design:
//   key_gen       h = g^k mod n, plus the Montgomery constants of n;
//   dual_encrypt  message -> (C1, C2) pairs on alpha_c1/alpha_c2, to the IP;
//   dual_decrypt  (C1, C2) pairs from the IP on beta_c1/beta_c2 -> message.
// The IP and the random number source are outside: the secret exponent k and
// the encryption exponents l arrive as ports, the ciphertexts leave and
// return through ports. Key generation must finish (key_done) before the
// first encryption or decryption; the public key and the Montgomery constants
// stay registered in key_gen. Each of the three operations has its own
// start/done pulse pair. select is sampled by each operation at its start.
module dual_elgamal_top
  import elgamal_pkg::*;
#(
  parameter int unsigned K = elgamal_pkg::K_BITS,
  // Width of a decrypted message: a value mod n or mod d.
  localparam int unsigned MOW = (elgamal_pkg::DW > K) ? elgamal_pkg::DW : K
) (
  input  logic          clock,
  input  logic          reset,
  input  mode_e         select,
  // Public parameters and secret exponent (from the random source).
  input  logic [K-1:0]  g,
  input  logic [K-1:0]  n,
  input  logic [K-1:0]  k,
  input  logic          key_start,
  output logic [K-1:0]  h,
  output logic          key_done,
  // Encryption: plaintext in, ciphertext out to the third-party IP.
  input  logic          enc_start,
  input  logic [K-1:0]  m_in,
  input  logic [K-1:0]  l [T],
  output logic [K-1:0]  alpha_c1 [T],
  output logic [K-1:0]  alpha_c2 [T],
  output logic          enc_done,
  // Decryption: ciphertext from the third-party IP in, plaintext out.
  input  logic          dec_start,
  input  logic [K-1:0]  beta_c1 [T],
  input  logic [K-1:0]  beta_c2 [T],
  output logic [MOW-1:0] m_out,
  output logic          dec_done
);

  logic [K-1:0] one_n, r2_n, k_sec;

  key_gen #(.K(K)) u_keygen (
    .clock, .reset, .start(key_start), .g, .n, .k,
    .h, .one_n, .r2_n, .k_out(k_sec), .done(key_done)
  );

  dual_encrypt #(.K(K)) u_encrypt (
    .clock, .reset, .start(enc_start), .select, .g, .h, .n, .one_n, .r2_n,
    .m(m_in), .l, .c1(alpha_c1), .c2(alpha_c2), .done(enc_done)
  );

  dual_decrypt #(.K(K)) u_decrypt (
    .clock, .reset, .start(dec_start), .select, .g, .n, .one_n, .r2_n,
    .k(k_sec), .c1(beta_c1), .c2(beta_c2), .m(m_out), .done(dec_done)
  );

endmodule
