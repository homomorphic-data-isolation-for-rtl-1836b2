// dual_encrypt: dual-mode homomorphic ElGamal encryption with its FSM controller.
//
// The select input chooses the homomorphic property of the ciphertext:
//   MODE_MUL (ElGamal, multiplicative): one pair
//       C1 = g^l mod n,  C2 = h^l * m mod n            (l = l[0])
//   MODE_ADD (CRT-based ElGamal, additive): T pairs, for i = 0..T-1
//       C1_i = g^l_i mod n,  C2_i = h^l_i * g^m_i mod n,  m_i = m mod d_i
// Both modes share the same units, as in the reference dual-circuit design:
// the modular reducer splits m into residues (additive mode only), three
// Montgomery exponentiators compute g^l, h^l and g^m_i concurrently (the third
// is idle in multiplicative mode), and one Montgomery multiplier forms C2 in
// two products: t = MM(h^l, R^2 mod n) = h^l * R mod n, then C2 = MM(x, t) with
// x = m or g^m_i. Using one multiplier for C2 follows the reference design;
// the number of exponentiators (three) is this design's choice. The random
// exponents l, l_i come from outside (a random number source).
//
// Interface: start samples all inputs; done pulses for one cycle when c1/c2
// are valid; they hold until the next start. In multiplicative mode only
// c1[0], c2[0] are written and the others read 0. Requirements: n odd prime
// below 2^K, g, h and m below n, one_n = 2^K mod n, r2_n = 2^2K mod n.
// Latency: per pair one exponentiation plus two multiplications; additive mode
// adds one message reduction. The exact counts are checked by the testbench.
module dual_encrypt
  import elgamal_pkg::*;
#(
  parameter int unsigned K = elgamal_pkg::K_BITS
) (
  input  logic         clock,
  input  logic         reset,
  input  logic         start,
  input  mode_e        select,
  input  logic [K-1:0] g,
  input  logic [K-1:0] h,
  input  logic [K-1:0] n,
  input  logic [K-1:0] one_n,
  input  logic [K-1:0] r2_n,
  input  logic [K-1:0] m,
  input  logic [K-1:0] l  [T],
  output logic [K-1:0] c1 [T],
  output logic [K-1:0] c2 [T],
  output logic         done
);

  localparam int unsigned IW = (T > 1) ? $clog2(T) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_RED, S_RED_W, S_EXP, S_EXP_W, S_MUL1, S_MUL1_W, S_MUL2, S_MUL2_W
  } state_e;

  state_e        state;
  mode_e         mode;
  logic [K-1:0]  gs, hs, ns, ones, r2s, ms, tv;
  logic [K-1:0]  ls [T];
  logic [IW-1:0] idx;
  logic [2:0]    exp_seen;

  // Modular reducer.
  logic          red_start, red_done;
  logic [RW-1:0] res [T];

  mod_reducer #(.K(K)) u_reducer (
    .clock, .reset, .start(red_start), .m(ms), .r(res), .done(red_done)
  );

  // Three exponentiators: g^l, h^l, g^m_i.
  logic         exp_start, exp2_start;
  logic [K-1:0] e0_z, e1_z, e2_z;
  logic         e0_done, e1_done, e2_done;

  mont_exp #(.K(K)) u_exp_gl (
    .clock, .reset, .start(exp_start), .y(gs), .x(ls[idx]), .m(ns),
    .one_m(ones), .r2_m(r2s), .z(e0_z), .done(e0_done)
  );

  mont_exp #(.K(K)) u_exp_hl (
    .clock, .reset, .start(exp_start), .y(hs), .x(ls[idx]), .m(ns),
    .one_m(ones), .r2_m(r2s), .z(e1_z), .done(e1_done)
  );

  mont_exp #(.K(K)) u_exp_gm (
    .clock, .reset, .start(exp2_start), .y(gs), .x(K'(res[idx])), .m(ns),
    .one_m(ones), .r2_m(r2s), .z(e2_z), .done(e2_done)
  );

  // One shared Montgomery multiplier.
  logic         mm_start, mm_done;
  logic [K-1:0] mm_x, mm_y, mm_z;

  mont_mult #(.K(K)) u_mult (
    .clock, .reset, .start(mm_start), .x(mm_x), .y(mm_y), .m(ns),
    .z(mm_z), .done(mm_done)
  );

  always_comb begin
    red_start  = (state == S_RED);
    exp_start  = (state == S_EXP);
    exp2_start = (state == S_EXP) && (mode == MODE_ADD);
    mm_start   = (state == S_MUL1) || (state == S_MUL2);
    if (state == S_MUL1) begin
      mm_x = e1_z;                            // h^l
      mm_y = r2s;                             // -> h^l * R mod n
    end else begin
      mm_x = (mode == MODE_ADD) ? e2_z : ms;  // g^m_i or m
      mm_y = tv;                              // -> x * h^l mod n
    end
  end

  always_ff @(posedge clock) begin
    if (reset) begin
      state    <= S_IDLE;
      mode     <= MODE_MUL;
      gs       <= '0;
      hs       <= '0;
      ns       <= '0;
      ones     <= '0;
      r2s      <= '0;
      ms       <= '0;
      tv       <= '0;
      idx      <= '0;
      exp_seen <= '0;
      done     <= 1'b0;
      for (int i = 0; i < T; i++) begin
        ls[i] <= '0;
        c1[i] <= '0;
        c2[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mode <= select;
          gs   <= g;
          hs   <= h;
          ns   <= n;
          ones <= one_n;
          r2s  <= r2_n;
          ms   <= m;
          idx  <= '0;
          for (int i = 0; i < T; i++) begin
            ls[i] <= l[i];
            c1[i] <= '0;
            c2[i] <= '0;
          end
          state <= (select == MODE_ADD) ? S_RED : S_EXP;
        end
        S_RED:   state <= S_RED_W;
        S_RED_W: if (red_done) state <= S_EXP;
        S_EXP: begin
          exp_seen <= {mode != MODE_ADD, 2'b00};
          state    <= S_EXP_W;
        end
        S_EXP_W: begin
          exp_seen <= exp_seen | {e2_done, e1_done, e0_done};
          if ((exp_seen | {e2_done, e1_done, e0_done}) == 3'b111) begin
            c1[idx] <= e0_z;
            state   <= S_MUL1;
          end
        end
        S_MUL1:   state <= S_MUL1_W;
        S_MUL1_W: if (mm_done) begin
          tv    <= mm_z;
          state <= S_MUL2;
        end
        S_MUL2:   state <= S_MUL2_W;
        S_MUL2_W: if (mm_done) begin
          c2[idx] <= mm_z;
          if (mode == MODE_MUL || idx == IW'(T - 1)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            idx   <= idx + 1'b1;
            state <= S_EXP;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // An operation is started only when the previous one has finished.
  a_start_when_idle: assert property (@(posedge clock) disable iff (reset)
    start |-> state == S_IDLE);

endmodule
