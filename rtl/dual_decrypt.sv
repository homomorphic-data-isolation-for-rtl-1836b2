// dual_decrypt: dual-mode homomorphic ElGamal decryption with its FSM controller.
//
// select chooses how the ciphertext was formed:
//   MODE_MUL (ElGamal): m = C2 / C1^k mod n, from pair 0.
//   MODE_ADD (CRT-based ElGamal): for each of the T pairs
//       v_i = C2_i / C1_i^k mod n = g^e_i,  e_i = log_g(v_i),
//   then m = sum_i e_i * w_i mod d, w_i the inverse-CRT weights.
// The units are those of the reference design: one Montgomery exponentiator
// (C1^k), one plus-minus modular divider (C2 / C1^k, so no inverse is needed),
// one Montgomery multiplier, one modular adder and one memory holding the
// weights w_i. How the discrete logarithm and the weighted CRT sum are formed
// is not spelled out there; here the multiplier walks g^0, g^1, g^2, ...
// (a = MM(a, g*R mod n) = a*g mod n) until it meets v_i, counting e_i, and
// the adder then adds w_i to the running sum e_i times modulo d. Because
// e_i is the full exponent, not reduced mod d_i, ciphertexts that were
// multiplied together homomorphically (exponents added) decrypt to the sum of
// the messages mod d. The search is bounded to 2^K - 1 steps.
//
// Interface: start samples all inputs; done pulses one cycle with m valid; m
// holds until the next start. k is the secret exponent. Requirements: n odd
// prime below 2^K, 0 < C1_i, C2_i < n, one_n = 2^K mod n, r2_n = 2^2K mod n.
// Latency depends on the data in additive mode (about (K+3) cycles per
// logarithm step and one cycle per CRT addition).
module dual_decrypt
  import elgamal_pkg::*;
#(
  parameter int unsigned K = elgamal_pkg::K_BITS,
  // Width of a decrypted message: a value mod n or mod d.
  localparam int unsigned MOW = (elgamal_pkg::DW > K) ? elgamal_pkg::DW : K
) (
  input  logic          clock,
  input  logic          reset,
  input  logic          start,
  input  mode_e         select,
  input  logic [K-1:0]  g,
  input  logic [K-1:0]  n,
  input  logic [K-1:0]  one_n,
  input  logic [K-1:0]  r2_n,
  input  logic [K-1:0]  k,
  input  logic [K-1:0]  c1 [T],
  input  logic [K-1:0]  c2 [T],
  output logic [MOW-1:0] m,
  output logic          done
);

  localparam int unsigned IW = (T > 1) ? $clog2(T) : 1;
  localparam int unsigned AW = (T > 1) ? $clog2(T) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_GR, S_GR_W, S_EXP, S_EXP_W, S_DIV, S_DIV_W,
    S_LOG, S_LOG_W, S_CRT, S_NEXT
  } state_e;

  state_e        state;
  mode_e         mode;
  logic [K-1:0]  gs, ns, ones, r2s, ks, gr, v, acc_g, e;
  logic [K-1:0]  c1s [T];
  logic [K-1:0]  c2s [T];
  logic [IW-1:0] idx;
  logic [K-1:0]  cnt;
  logic [DW-1:0] sum;

  // Montgomery exponentiator: s = C1_i^k.
  logic         exp_start, exp_done;
  logic [K-1:0] exp_z;

  mont_exp #(.K(K)) u_exp (
    .clock, .reset, .start(exp_start), .y(c1s[idx]), .x(ks), .m(ns),
    .one_m(ones), .r2_m(r2s), .z(exp_z), .done(exp_done)
  );

  // Modular divider: v = C2_i / s.
  logic         div_start, div_done;
  logic [K-1:0] div_z;

  mod_div #(.K(K)) u_div (
    .clock, .reset, .start(div_start), .x(c2s[idx]), .y(exp_z), .m(ns),
    .z(div_z), .done(div_done)
  );

  // Montgomery multiplier: g*R mod n once, then the logarithm walk.
  logic         mm_start, mm_done;
  logic [K-1:0] mm_x, mm_y, mm_z;

  mont_mult #(.K(K)) u_mult (
    .clock, .reset, .start(mm_start), .x(mm_x), .y(mm_y), .m(ns),
    .z(mm_z), .done(mm_done)
  );

  // Inverse-CRT weight memory and modular adder.
  logic [DW-1:0] w;
  logic [DW-1:0] sum_n;

  crt_rom u_rom (.clock, .addr(AW'(idx)), .data(w));

  mod_adder #(.W(DW)) u_add (.a(sum), .b(w), .d(DW'(D)), .s(sum_n));

  always_comb begin
    exp_start = (state == S_EXP);
    div_start = (state == S_DIV);
    mm_start  = (state == S_GR) || (state == S_LOG && acc_g != v && e != '1);
    if (state == S_GR) begin
      mm_x = gs;
      mm_y = r2s;    // g * R mod n
    end else begin
      mm_x = acc_g;
      mm_y = gr;     // acc_g * g mod n
    end
  end

  always_ff @(posedge clock) begin
    if (reset) begin
      state <= S_IDLE;
      mode  <= MODE_MUL;
      gs    <= '0;
      ns    <= '0;
      ones  <= '0;
      r2s   <= '0;
      ks    <= '0;
      gr    <= '0;
      v     <= '0;
      acc_g <= '0;
      e     <= '0;
      idx   <= '0;
      cnt   <= '0;
      sum   <= '0;
      m     <= '0;
      done  <= 1'b0;
      for (int i = 0; i < T; i++) begin
        c1s[i] <= '0;
        c2s[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mode <= select;
          gs   <= g;
          ns   <= n;
          ones <= one_n;
          r2s  <= r2_n;
          ks   <= k;
          idx  <= '0;
          sum  <= '0;
          for (int i = 0; i < T; i++) begin
            c1s[i] <= c1[i];
            c2s[i] <= c2[i];
          end
          state <= (select == MODE_ADD) ? S_GR : S_EXP;
        end
        S_GR:   state <= S_GR_W;
        S_GR_W: if (mm_done) begin
          gr    <= mm_z;
          state <= S_EXP;
        end
        S_EXP:   state <= S_EXP_W;
        S_EXP_W: if (exp_done) state <= S_DIV;
        S_DIV:   state <= S_DIV_W;
        S_DIV_W: if (div_done) begin
          if (mode == MODE_MUL) begin
            m     <= MOW'(div_z);
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            v     <= div_z;
            acc_g <= K'(1);
            e     <= '0;
            state <= S_LOG;
          end
        end
        S_LOG: begin
          if (acc_g == v || e == '1) begin
            cnt   <= '0;
            state <= S_CRT;
          end else begin
            state <= S_LOG_W;
          end
        end
        S_LOG_W: if (mm_done) begin
          acc_g <= mm_z;
          e     <= e + 1'b1;
          state <= S_LOG;
        end
        S_CRT: begin
          // w holds entry idx (the address has been stable since S_EXP).
          if (cnt == e) state <= S_NEXT;
          else begin
            sum <= sum_n;
            cnt <= cnt + 1'b1;
          end
        end
        S_NEXT: begin
          if (idx == IW'(T - 1)) begin
            m     <= MOW'(sum);
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
