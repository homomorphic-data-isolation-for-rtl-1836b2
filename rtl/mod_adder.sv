// mod_adder: combinational modular adder, s = (a + b) mod d.
//
// Both addends must already be below d; the sum is then below 2d and one
// conditional subtraction reduces it. The decryptor uses it, with d the
// product of the CRT moduli, to accumulate the inverse-CRT sum. The adder's
// presence follows the reference design; its single-cycle combinational form
// is this design's choice.
//
// Interface: purely combinational, no clock. W is the operand width.
module mod_adder #(
  parameter int unsigned W = elgamal_pkg::DW
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] d,
  output logic [W-1:0] s
);

  logic [W:0] sum;

  always_comb begin
    sum = {1'b0, a} + {1'b0, b};
    s   = (sum >= {1'b0, d}) ? W'(sum - {1'b0, d}) : sum[W-1:0];
  end

endmodule
