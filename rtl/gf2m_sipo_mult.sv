// gf2m_sipo_mult: serial-in parallel-out GF(2^m) multiplier, polynomial basis,
// MSB first, with interleaved modular reduction and NAND-only addition.
//
// Computes C(x) = A(x) * B(x) mod f(x) by Horner's rule over the bits of B:
//   P^0 = 0;  P^k = (x * P^(k-1) mod f) XOR b_{m-k} * A,  k = 1 .. m;  C = P^m
// Datapath: Reg1 (gf2m_operand_reg) holds A; Reg2 (gf2m_accum_reg) holds P.
// Block G (gf2m_block_g) shifts P left one place by re-wiring and folds the
// overflow bit p_{m-1} back in through f; block H (gf2m_block_h) adds b*A.
// Every GF(2) addition is a four-NAND XOR cell, so the datapath has 2m AND,
// 8m NAND and no XOR gates, plus the 2m register bits. gf2m_ctrl sequences it.
//
// Interface and timing:
//   - start (while idle) captures a_in into Reg1 and clears Reg2.
//   - The next M cycles have b_req high. In each, b_bit must carry the next bit
//     of B, b_{M-1} first and b_0 last; it is consumed at the clock edge.
//   - done pulses for one cycle after the M-th iteration; c (Reg2) then holds
//     A*B mod f until the next start. busy is high during the iterations.
//   - f = {f_{M-1}, ..., f_0} is the field polynomial without its x^M term; any
//     polynomial of degree M may be used and must stay stable while busy.
//     gf2m_pkg::nist_poly(M) gives the NIST ones.
// The iteration datapath and its gate structure follow the multiplier's
// published design; the load cycle, the start/done/b_req handshake and the
// asynchronous active-low reset are this design's own.
module gf2m_sipo_mult #(
  parameter int unsigned M = gf2m_pkg::M_DEFAULT
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [M-1:0] a_in,
  input  logic [M-1:0] f,
  input  logic         b_bit,
  output logic         b_req,
  output logic         busy,
  output logic         done,
  output logic [M-1:0] c
);

  logic         load, step;
  logic [M-1:0] a_q;      // Reg1
  logic [M-1:0] p_q;      // Reg2
  logic [M-1:0] r;        // block G output
  logic [M-1:0] p_next;   // block H output

  gf2m_ctrl #(.M(M)) u_ctrl (
    .clk   (clk),
    .rst_n (rst_n),
    .start (start),
    .load  (load),
    .step  (step),
    .busy  (busy),
    .done  (done)
  );

  gf2m_operand_reg #(.M(M)) u_reg1 (
    .clk   (clk),
    .rst_n (rst_n),
    .load  (load),
    .a_in  (a_in),
    .a_q   (a_q)
  );

  gf2m_block_g #(.M(M)) u_g (
    .p (p_q),
    .f (f),
    .r (r)
  );

  gf2m_block_h #(.M(M)) u_h (
    .r      (r),
    .a      (a_q),
    .b_bit  (b_bit),
    .p_next (p_next)
  );

  gf2m_accum_reg #(.M(M)) u_reg2 (
    .clk   (clk),
    .rst_n (rst_n),
    .clear (load),
    .en    (step),
    .d     (p_next),
    .q     (p_q)
  );

  assign b_req = step;
  assign c     = p_q;

endmodule
