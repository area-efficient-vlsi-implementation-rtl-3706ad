// gf2m_operand_reg: Reg1, the m-bit register that holds operand A.
//
// Captures a_in on a clock edge where load is high and holds it otherwise, so
// that A stays stable at the AND inputs of block H for all m iterations of a
// multiplication. Asynchronous active-low reset clears it to zero; the load
// enable and the reset are this design's choices, the register itself is one
// of the multiplier's two m-bit registers.
module gf2m_operand_reg #(
  parameter int unsigned M = gf2m_pkg::M_DEFAULT
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [M-1:0] a_in,
  output logic [M-1:0] a_q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    a_q <= '0;
    else if (load) a_q <= a_in;
  end

endmodule
