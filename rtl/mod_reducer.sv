// mod_reducer: splits a K-bit message into its CRT residues m_i = m mod d_i.
//
// All T residues are produced together by T restoring-remainder lanes that
// share one shift of the message: for each message bit, most significant
// first, every lane doubles its remainder, adds the bit and subtracts d_i if
// the result reaches d_i. The moduli d_i are the package's D_LIST. The block's
// role (reducing m into the m_i of the additive scheme) follows the reference
// design; the bit-serial restoring method is this design's choice.
//
// Interface: start samples m; done pulses one cycle after K steps (done is
// high K+1 clock edges after the edge that samples start); the residues hold
// until the next start.
module mod_reducer
  import elgamal_pkg::*;
#(
  parameter int unsigned K = elgamal_pkg::K_BITS
) (
  input  logic          clock,
  input  logic          reset,
  input  logic          start,
  input  logic [K-1:0]  m,
  output logic [RW-1:0] r [T],
  output logic          done
);

  localparam int unsigned CW = $clog2(K + 1);

  logic [K-1:0]  ms;
  logic [CW-1:0] cnt;
  logic          busy;
  logic [RW:0]   nxt [T];

  always_comb begin
    for (int i = 0; i < T; i++) begin
      nxt[i] = {r[i], ms[K-1]};
      if (nxt[i] >= (RW+1)'(D_LIST[i])) nxt[i] = nxt[i] - (RW+1)'(D_LIST[i]);
    end
  end

  always_ff @(posedge clock) begin
    if (reset) begin
      ms   <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      for (int i = 0; i < T; i++) r[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        ms   <= m;
        cnt  <= '0;
        busy <= 1'b1;
        for (int i = 0; i < T; i++) r[i] <= '0;
      end else if (busy) begin
        for (int i = 0; i < T; i++) r[i] <= nxt[i][RW-1:0];
        ms  <= ms << 1;
        cnt <= cnt + 1'b1;
        if (cnt == CW'(K - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
