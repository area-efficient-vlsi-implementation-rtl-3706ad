// gf2m_block_g: block G, the interleaved modular reduction x*P(x) mod f(x).
//
// Multiplying the partial product P(x) = p_{m-1}x^{m-1} + ... + p_0 by x gives
// a term p_{m-1}x^m, which is replaced by p_{m-1}(f_{m-1}x^{m-1} + ... + f_0)
// because f(x) = 0 in the field. So output bit i is
//   r_i = (p_{m-1} & f_i) XOR p_{i-1}    (p_{-1} = 0)
// The left shift (the SL block) is only re-wiring, done on the second input of
// the XOR cells. The block is one level of m AND gates (p_{m-1} & f_i) and m
// four-NAND XOR cells (gf2m_nand_xor), as in the multiplier's gate count of
// m AND + 4m NAND per block. Bit 0 adds a constant 0 through its cell so that
// every bit has the same structure; synthesis may remove that cell.
//
// f holds the lower m coefficients of a generic field polynomial; the x^m term
// is implicit. Purely combinational.
module gf2m_block_g #(
  parameter int unsigned M = gf2m_pkg::M_DEFAULT
) (
  input  logic [M-1:0] p,   // P^(k-1), from the accumulator register
  input  logic [M-1:0] f,   // f_{m-1} .. f_0
  output logic [M-1:0] r    // x * P^(k-1) mod f
);

  logic [M-1:0] red;        // p_{m-1} & f_i: reduction term
  logic [M-1:0] shl;        // P shifted left by one place (SL re-wiring)

  assign red = {M{p[M-1]}} & f;
  assign shl = {p[M-2:0], 1'b0};

  for (genvar i = 0; i < M; i++) begin : g_bit
    gf2m_nand_xor u_xor (
      .a (red[i]),
      .b (shl[i]),
      .y (r[i])
    );
  end

endmodule
