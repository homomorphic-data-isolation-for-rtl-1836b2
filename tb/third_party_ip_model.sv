// third_party_ip_model: behavioural stand-in for the untrusted IP block.
//
// Not part of the design: it models the third-party block that receives only
// ciphertexts. Like an ALU whose operation is "combine two operands", it
// multiplies two ciphertexts word by word modulo n, which is the homomorphic
// product (messages multiplied in multiplicative mode, added in additive
// mode). It uses the % operator and a fixed latency of LAT cycles.
module third_party_ip_model
  import elgamal_pkg::*;
#(
  parameter int unsigned K   = 8,
  parameter int unsigned LAT = 4
) (
  input  logic         clock,
  input  logic         start,
  input  logic [K-1:0] n,
  input  logic [K-1:0] a1 [T],
  input  logic [K-1:0] a2 [T],
  input  logic [K-1:0] b1 [T],
  input  logic [K-1:0] b2 [T],
  output logic [K-1:0] y1 [T],
  output logic [K-1:0] y2 [T],
  output logic         done
);

  initial begin
    done = 1'b0;
    for (int i = 0; i < T; i++) begin
      y1[i] = '0;
      y2[i] = '0;
    end
  end

  always @(posedge clock) begin
    if (start) begin
      repeat (LAT) @(posedge clock);
      for (int i = 0; i < T; i++) begin
        y1[i] <= K'((longint'(a1[i]) * longint'(b1[i])) % longint'(n));
        y2[i] <= K'((longint'(a2[i]) * longint'(b2[i])) % longint'(n));
      end
      done <= 1'b1;
      @(posedge clock);
      done <= 1'b0;
    end
  end

endmodule
