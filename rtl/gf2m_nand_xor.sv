// gf2m_nand_xor: two-input exclusive-OR built from four 2-input NAND gates.
//
// This is the cell the multiplier uses wherever it adds two GF(2) values, in
// place of an XOR gate:
//   n1 = ~(a & b);  n2 = ~(a & n1);  n3 = ~(b & n1);  y = ~(n2 & n3) = a ^ b
// Three levels of NAND, four gates. The cell and its three-level structure
// follow the multiplier's formulation; each gate is written out as its own net
// so that the structure is visible in the netlist before optimisation.
// Purely combinational; no clock.
module gf2m_nand_xor (
  input  logic a,
  input  logic b,
  output logic y
);

  logic n1, n2, n3;

  assign n1 = ~(a & b);
  assign n2 = ~(a & n1);
  assign n3 = ~(b & n1);
  assign y  = ~(n2 & n3);

endmodule
