// key_gen: key generation, public key h = g^k mod n.
//
// The secret exponent k (from a random number source outside this design) is
// registered and kept for the decryptor. Two Montgomery constants of the
// modulus are derived first by repeated modular doubling of 1: after K
// doublings the value is R mod n = 2^K mod n (Montgomery form of 1), after 2K
// doublings R^2 mod n. The public key is then computed with a Montgomery
// exponentiator. That key generation is essentially one Montgomery
// exponentiation follows the reference design; deriving the Montgomery
// constants here, once per key, is this design's choice.
//
// Interface: start samples g, n and k; done pulses one cycle when h, one_n,
// r2_n and k_out are valid; they hold until the next start. Latency: 2K
// doubling cycles plus one exponentiation.
module key_gen #(
  parameter int unsigned K = elgamal_pkg::K_BITS
) (
  input  logic         clock,
  input  logic         reset,
  input  logic         start,
  input  logic [K-1:0] g,
  input  logic [K-1:0] n,
  input  logic [K-1:0] k,
  output logic [K-1:0] h,
  output logic [K-1:0] one_n,
  output logic [K-1:0] r2_n,
  output logic [K-1:0] k_out,
  output logic         done
);

  localparam int unsigned CW = $clog2(2 * K + 1);

  typedef enum logic [1:0] {S_IDLE, S_DBL, S_EXP, S_EXP_W} state_e;

  state_e        state;
  logic [K-1:0]  gs, ns, r;
  logic [CW-1:0] cnt;
  logic [K:0]    r2x;

  logic         exp_start, exp_done;
  logic [K-1:0] exp_z;

  mont_exp #(.K(K)) u_exp (
    .clock, .reset, .start(exp_start), .y(gs), .x(k_out), .m(ns),
    .one_m(one_n), .r2_m(r2_n), .z(exp_z), .done(exp_done)
  );

  always_comb begin
    exp_start = (state == S_EXP);
    r2x       = {r, 1'b0};
  end

  always_ff @(posedge clock) begin
    if (reset) begin
      state <= S_IDLE;
      gs    <= '0;
      ns    <= '0;
      r     <= '0;
      cnt   <= '0;
      h     <= '0;
      one_n <= '0;
      r2_n  <= '0;
      k_out <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          gs    <= g;
          ns    <= n;
          k_out <= k;
          r     <= K'(1);
          cnt   <= '0;
          state <= S_DBL;
        end
        S_DBL: begin
          // r = 2r mod n (r < n, so one subtraction suffices).
          r   <= (r2x >= {1'b0, ns}) ? K'(r2x - {1'b0, ns}) : r2x[K-1:0];
          cnt <= cnt + 1'b1;
          if (cnt == CW'(K)) one_n <= r;
          if (cnt == CW'(2 * K)) begin
            r2_n  <= r;
            state <= S_EXP;
          end
        end
        S_EXP:   state <= S_EXP_W;
        S_EXP_W: if (exp_done) begin
          h     <= exp_z;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // An operation is started only when the previous one has finished.
  a_start_when_idle: assert property (@(posedge clock) disable iff (reset)
    start |-> state == S_IDLE);

endmodule
