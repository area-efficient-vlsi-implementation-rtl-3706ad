// gf2m_accum_reg: Reg2, the m-bit partial-product (accumulator) register.
//
// Cleared to zero when a multiplication starts (clear), then on each of the m
// iteration cycles (en) it captures P^k from block H. Its output feeds block G
// as P^(k-1) and, after the last iteration, is the parallel product C. It holds
// its value when neither clear nor en is high, so the product can be read
// until the next multiplication starts. Clear has priority over en.
// Asynchronous active-low reset to zero. The clear/enable controls are this
// design's choices; the register is the second of the multiplier's two m-bit
// registers.
module gf2m_accum_reg #(
  parameter int unsigned M = gf2m_pkg::M_DEFAULT
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  input  logic [M-1:0] d,
  output logic [M-1:0] q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     q <= '0;
    else if (clear) q <= '0;
    else if (en)    q <= d;
  end

endmodule
