// elgamal_pkg: constants, types and constant functions shared by the dual
// (multiplicative / additive) homomorphic ElGamal datapath.
//
// K is the width of every k-bit vector of the scheme: the modulus n, the
// generator g, the public key h, the message m, the exponents and each
// ciphertext word. Its value, 8, is the vector size every result table of the
// reference evaluation uses. The CRT moduli d_i of the additive (CRT-based)
// variant and their number T are not given there; the pairwise coprime set
// {7, 9, 11} is this design's choice: its product d = 693 exceeds the sum of
// two 8-bit messages, so one homomorphic addition of two messages decrypts
// exactly. The inverse-CRT weights stored in the decryptor's memory are
// derived from that set by crt_weight().
package elgamal_pkg;

  // Width of all k-bit vectors (modulus, operands, exponents).
  parameter int unsigned K_BITS = 8;

  // Number of ciphertext pairs of the additive (CRT-based) mode.
  parameter int unsigned T = 3;

  // Pairwise coprime CRT moduli d_1..d_T.
  parameter int unsigned D_LIST [T] = '{7, 9, 11};

  // Product d of the CRT moduli.
  function automatic int unsigned crt_product();
    int unsigned p = 1;
    for (int i = 0; i < T; i++) p = p * D_LIST[i];
    return p;
  endfunction

  // Largest CRT modulus.
  function automatic int unsigned crt_dmax();
    int unsigned mx = 0;
    for (int i = 0; i < T; i++) if (D_LIST[i] > mx) mx = D_LIST[i];
    return mx;
  endfunction

  parameter int unsigned D  = crt_product();   // 693
  parameter int unsigned DW = $clog2(D);       // width of a value mod d
  parameter int unsigned RW = $clog2(crt_dmax()); // width of a residue m mod d_i
  parameter int unsigned MW = (DW > K_BITS) ? DW : K_BITS; // decrypted message width at K_BITS

  // Inverse-CRT weight of modulus i: (d/d_i) * ((d/d_i)^-1 mod d_i) mod d.
  function automatic int unsigned crt_weight(int unsigned i);
    int unsigned mi  = D / D_LIST[i];
    int unsigned inv = 0;
    for (int unsigned j = 1; j < D_LIST[i]; j++)
      if (((mi * j) % D_LIST[i]) == 1) inv = j;
    return (mi * inv) % D;
  endfunction

  // Homomorphic property chosen by the select input.
  typedef enum logic {
    MODE_MUL = 1'b0,  // ElGamal: multiplicative homomorphic, one pair
    MODE_ADD = 1'b1   // CRT-based ElGamal (CEG): additive homomorphic, T pairs
  } mode_e;

endpackage
