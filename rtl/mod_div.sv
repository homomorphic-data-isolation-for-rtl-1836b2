// mod_div: modular divider, z = x / y mod m, plus-minus algorithm.
//
// For an odd prime modulus m < 2^K, x < m and 0 < y < m the divider returns z
// with z * y = x (mod m) without computing an inverse first. It runs the
// plus-minus binary GCD on the pair (A, B) = (y, m) and mirrors every step on
// (U, V) = (x, 0), keeping U*y = A*x and V*y = B*x (mod m):
//   - A even:  A = A/2, U = U/2 mod m.
//   - A odd:   if A's size bound is below B's, swap (A,U) with (B,V); then
//              A = (A+B)/2 or (A-B)/2, whichever makes A divisible by 2 again
//              (chosen from (A+B) mod 4), and U likewise from U+V or U-V.
// A and B are signed; size bounds alpha and beta (bits) replace a magnitude
// comparison, which is what distinguishes plus-minus from the plain binary
// algorithm. When A reaches 0, B = +1 or -1 and z = V or -V. Halving mod m is
// u/2 for even u and (u+m)/2 for odd u. The choice of the plus-minus algorithm
// follows the reference design; its step-per-clock form is this design's.
//
// Interface: start samples x, y, m; done pulses one cycle with z valid; z
// holds until the next start. One step per clock plus two cycles of overhead:
// at most 25 cycles for K = 8 over all operands tried. With y = 0
// the divider ends at once and z is meaningless.
module mod_div #(
  parameter int unsigned K = elgamal_pkg::K_BITS
) (
  input  logic         clock,
  input  logic         reset,
  input  logic         start,
  input  logic [K-1:0] x,
  input  logic [K-1:0] y,
  input  logic [K-1:0] m,
  output logic [K-1:0] z,
  output logic         done
);

  localparam int unsigned SW = K + 2;               // signed A, B width
  localparam int unsigned BW = $clog2(K + 1) + 2;   // signed bound width

  logic signed [SW-1:0] a, b;
  logic        [K-1:0]  u, v, ms;
  logic signed [BW-1:0] alpha, beta;
  logic                 busy;

  // Halving modulo an odd modulus.
  function automatic logic [K-1:0] half_mod(logic [K-1:0] w, logic [K-1:0] md);
    logic [K:0] t;
    t = w[0] ? ({1'b0, w} + {1'b0, md}) : {1'b0, w};
    return t[K:1];
  endfunction

  // One plus-minus step, computed combinationally.
  logic signed [SW-1:0] a1, b1, sum_ab, dif_ab, a_n, b_n;
  logic        [K-1:0]  u1, v1, u_n, v_n;
  logic signed [BW-1:0] al1, be1, al_n, be_n;
  logic        [K:0]    upv;
  logic        [K-1:0]  upv_m, umv_m;

  always_comb begin
    a_n  = a;   b_n  = b;   u_n = u;   v_n = v;
    al_n = alpha; be_n = beta;
    a1 = a; b1 = b; u1 = u; v1 = v; al1 = alpha; be1 = beta;
    sum_ab = '0; dif_ab = '0; upv = '0; upv_m = '0; umv_m = '0;
    if (!a[0]) begin
      a_n  = a >>> 1;
      u_n  = half_mod(u, ms);
      al_n = alpha - 1'b1;
    end else begin
      if (alpha < beta) begin
        a1 = b; b1 = a; u1 = v; v1 = u; al1 = beta; be1 = alpha;
      end
      sum_ab = a1 + b1;
      dif_ab = a1 - b1;
      upv    = {1'b0, u1} + {1'b0, v1};
      upv_m  = (upv >= {1'b0, ms}) ? K'(upv - {1'b0, ms}) : upv[K-1:0];
      umv_m  = (u1 >= v1) ? (u1 - v1) : (u1 + ms - v1);
      if (sum_ab[1:0] == 2'b00) begin
        a_n = sum_ab >>> 1;
        u_n = half_mod(upv_m, ms);
      end else begin
        a_n = dif_ab >>> 1;
        u_n = half_mod(umv_m, ms);
      end
      b_n  = b1;
      v_n  = v1;
      al_n = al1;
      be_n = be1;
    end
  end

  always_ff @(posedge clock) begin
    if (reset) begin
      a     <= '0;
      b     <= '0;
      u     <= '0;
      v     <= '0;
      ms    <= '0;
      alpha <= '0;
      beta  <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
      z     <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        a     <= SW'(y);
        b     <= SW'(m);
        u     <= x;
        v     <= '0;
        ms    <= m;
        alpha <= BW'(K);
        beta  <= BW'(K);
        busy  <= 1'b1;
      end else if (busy) begin
        if (a == '0) begin
          // B is +1 or -1 here.
          z    <= (b == SW'(1) || v == '0) ? v : (ms - v);
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          a     <= a_n;
          b     <= b_n;
          u     <= u_n;
          v     <= v_n;
          alpha <= al_n;
          beta  <= be_n;
        end
      end
    end
  end

  a_odd_modulus: assert property (@(posedge clock) disable iff (reset)
    start |-> m[0]);

endmodule
