// mont_exp: LSB-first modular exponentiator built on two Montgomery multipliers.
//
// Computes z = y^x mod m for an odd modulus m < 2^K, a base y < m and a K-bit
// exponent x. The base is first brought into the Montgomery domain
// (yM = MM(y, R^2 mod m), R = 2^K) and the accumulator starts at R mod m, the
// Montgomery form of 1. The exponent is then scanned from its least
// significant bit: in each of the K iterations multiplier B squares yM while
// multiplier A, when the current bit is 1, multiplies the accumulator by yM;
// both run concurrently. A last MM(e, 1) leaves the Montgomery domain. The
// LSB-first scan with two concurrent products per iteration follows the
// reference design; the two Montgomery constants are inputs (computed once
// per modulus by the key generator), which is this implementation's choice.
//
// Interface: start (one cycle) samples y, x, m, one_m = R mod m and
// r2_m = R^2 mod m; done pulses for one cycle with z valid; z holds until the
// next start. Latency is independent of the operands: (K+2) multiplications
// of K+3 cycles each; done is high (K+2)*(K+3)+1 clock edges after the edge
// that samples start (111 for K = 8).
module mont_exp #(
  parameter int unsigned K = elgamal_pkg::K_BITS
) (
  input  logic         clock,
  input  logic         reset,
  input  logic         start,
  input  logic [K-1:0] y,      // base, < m
  input  logic [K-1:0] x,      // exponent
  input  logic [K-1:0] m,      // odd modulus
  input  logic [K-1:0] one_m,  // 2^K mod m
  input  logic [K-1:0] r2_m,   // 2^2K mod m
  output logic [K-1:0] z,
  output logic         done
);

  localparam int unsigned CW = $clog2(K + 1);

  typedef enum logic [2:0] {
    S_IDLE, S_PRE, S_PRE_W, S_LOOP, S_LOOP_W, S_POST, S_POST_W
  } state_e;

  state_e        state;
  logic [K-1:0]  xs, ms, ys, r2s, e, yM;
  logic [CW-1:0] i;

  logic          a_start, b_start, a_done, b_done;
  logic [K-1:0]  a_x, a_y, a_z, b_z;

  // Multiplier A: conversion in, accumulate, conversion out.
  always_comb begin
    a_start = 1'b0;
    b_start = 1'b0;
    a_x     = e;
    a_y     = yM;
    unique case (state)
      S_PRE:  begin a_start = 1'b1; a_x = ys; a_y = r2s; end
      S_LOOP: begin a_start = xs[0]; b_start = 1'b1; end
      S_POST: begin a_start = 1'b1; a_x = K'(1); a_y = e; end
      default: ;
    endcase
  end

  mont_mult #(.K(K)) u_mult_a (
    .clock, .reset, .start(a_start), .x(a_x), .y(a_y), .m(ms),
    .z(a_z), .done(a_done)
  );

  // Multiplier B: squaring of the base.
  mont_mult #(.K(K)) u_mult_b (
    .clock, .reset, .start(b_start), .x(yM), .y(yM), .m(ms),
    .z(b_z), .done(b_done)
  );

  always_ff @(posedge clock) begin
    if (reset) begin
      state <= S_IDLE;
      xs    <= '0;
      ms    <= '0;
      ys    <= '0;
      r2s   <= '0;
      e     <= '0;
      yM    <= '0;
      i     <= '0;
      z     <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          xs    <= x;
          ms    <= m;
          ys    <= y;
          r2s   <= r2_m;
          e     <= one_m;
          i     <= '0;
          state <= S_PRE;
        end
        S_PRE:   state <= S_PRE_W;
        S_PRE_W: if (a_done) begin
          yM    <= a_z;
          state <= S_LOOP;
        end
        S_LOOP:   state <= S_LOOP_W;
        S_LOOP_W: if (b_done) begin
          if (xs[0]) e <= a_z;      // A ran concurrently with B
          yM <= b_z;
          xs <= xs >> 1;
          if (i == CW'(K - 1)) state <= S_POST;
          else begin
            i     <= i + 1'b1;
            state <= S_LOOP;
          end
        end
        S_POST:   state <= S_POST_W;
        S_POST_W: if (a_done) begin
          z     <= a_z;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
