// mont_mult: binary (radix-2) Montgomery modular multiplier.
//
// Computes z = x * y * 2^-K mod m for an odd modulus m < 2^K and y < m
// (x may be any K-bit value). Only additions and one-bit shifts are used: in
// each of K iterations the partial sum p takes x_i * y, then m if it is odd,
// and is halved. The partial sum stays below 2m, so one conditional
// subtraction at the end gives the result in [0, m). This is the standard
// Montgomery algorithm the design builds every modular multiplication and
// exponentiation on; the bit-serial, one-iteration-per-clock organisation is
// this implementation's choice.
//
// Interface: a one-cycle start pulse loads x, y and m; done pulses for one
// cycle when z is valid, and z holds until the next start. Latency: done is
// high K+2 clock edges after the edge that samples start. start while busy
// restarts the operation. reset is synchronous and active high.
module mont_mult #(
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

  localparam int unsigned CW = $clog2(K + 1);

  logic [K-1:0]  xs, ys, ms;
  logic [K:0]    p;          // partial sum, always < 2m
  logic [CW-1:0] cnt;
  logic          busy;
  logic [K+1:0]  s1, s2;

  always_comb begin
    s1 = {1'b0, p} + (xs[0] ? {2'b00, ys} : '0);
    s2 = s1 + (s1[0] ? {2'b00, ms} : '0);
  end

  always_ff @(posedge clock) begin
    if (reset) begin
      xs   <= '0;
      ys   <= '0;
      ms   <= '0;
      p    <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      z    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        xs   <= x;
        ys   <= y;
        ms   <= m;
        p    <= '0;
        cnt  <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        if (cnt == CW'(K)) begin
          z    <= (p >= {1'b0, ms}) ? K'(p - {1'b0, ms}) : p[K-1:0];
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          p   <= s2[K+1:1];
          xs  <= xs >> 1;
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  // The Montgomery reduction needs an odd modulus.
  a_odd_modulus: assert property (@(posedge clock) disable iff (reset)
    start |-> m[0]);

endmodule
