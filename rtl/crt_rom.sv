// crt_rom: memory of the inverse-CRT weights used by the additive decryption.
//
// Entry i holds w_i = (d/d_i) * ((d/d_i)^-1 mod d_i) mod d, so that a message
// with residues c_i is recovered as sum_i c_i * w_i mod d. The reference design
// keeps these constants in one block memory; here the contents are computed
// at elaboration from the package's CRT moduli, so changing D_LIST refills
// the table. With the default moduli {7, 9, 11} the weights are 99, 154, 441.
//
// Interface: synchronous read like a block RAM; data is the entry at addr one
// clock edge after addr is presented.
module crt_rom
  import elgamal_pkg::*;
(
  input  logic                 clock,
  input  logic [$clog2(T)-1:0] addr,
  output logic [DW-1:0]        data
);

  logic [DW-1:0] mem [T];

  initial begin
    for (int i = 0; i < T; i++) mem[i] = DW'(crt_weight(i));
  end

  always_ff @(posedge clock) data <= mem[addr];

endmodule
