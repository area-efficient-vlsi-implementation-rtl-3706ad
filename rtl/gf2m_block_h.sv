// gf2m_block_h: block H, partial-product accumulation.
//
// Adds the current partial product b_{m-k} * A(x) to the reduced, shifted
// result of block G:
//   p_next_i = r_i XOR (b_bit & a_i)
// One level of m AND gates forms b_bit & a_i and m four-NAND XOR cells
// (gf2m_nand_xor) do the GF(2) addition, giving the m AND + 4m NAND of the
// multiplier's gate count. Purely combinational: b_bit, a and r all arrive
// from registers or the serial input in the same cycle, and p_next is
// captured by the accumulator register at the next clock edge.
module gf2m_block_h #(
  parameter int unsigned M = gf2m_pkg::M_DEFAULT
) (
  input  logic [M-1:0] r,       // x * P^(k-1) mod f, from block G
  input  logic [M-1:0] a,       // operand A, from the operand register
  input  logic         b_bit,   // current serial bit b_{m-k} of operand B
  output logic [M-1:0] p_next   // P^k
);

  logic [M-1:0] pp;             // partial product b_{m-k} * A

  assign pp = {M{b_bit}} & a;

  for (genvar i = 0; i < M; i++) begin : g_bit
    gf2m_nand_xor u_xor (
      .a (r[i]),
      .b (pp[i]),
      .y (p_next[i])
    );
  end

endmodule
