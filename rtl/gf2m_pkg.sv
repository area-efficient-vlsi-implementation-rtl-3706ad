// gf2m_pkg: constants and types shared by the bit-serial GF(2^m) multiplier.
//
// The field size defaults to m = 163, the field used for the case study of
// this multiplier. The field polynomial f(x) = x^m + f_{m-1}x^{m-1} + ... + f_0
// is handed to the datapath as the m-bit vector {f_{m-1}, ..., f_0}; the
// leading x^m term is implicit. nist_poly() returns that vector for the five
// binary fields recommended by NIST for elliptic-curve cryptography (FIPS 186),
// so that a user or a testbench need not type the coefficients in. The
// controller state type lives here too.
package gf2m_pkg;

  // Default field degree (the m = 163 case study).
  localparam int unsigned M_DEFAULT = 163;

  // Widest NIST binary field; nist_poly() returns vectors of this width.
  localparam int unsigned M_MAX = 571;

  // Controller states: waiting for start, or iterating over the bits of B.
  typedef enum logic [0:0] {
    CTRL_IDLE = 1'b0,
    CTRL_RUN  = 1'b1
  } ctrl_state_e;

  // Lower m coefficients of the NIST reduction polynomial of degree m
  // (bit i is f_i). Returns all zeros for any other m.
  //   m=163: x^163 + x^7 + x^6 + x^3 + 1
  //   m=233: x^233 + x^74 + 1
  //   m=283: x^283 + x^12 + x^7 + x^5 + 1
  //   m=409: x^409 + x^87 + 1
  //   m=571: x^571 + x^10 + x^5 + x^2 + 1
  function automatic logic [M_MAX-1:0] nist_poly(int unsigned m);
    logic [M_MAX-1:0] v;
    v = '0;
    case (m)
      163: begin v[7] = 1'b1; v[6] = 1'b1; v[3] = 1'b1; v[0] = 1'b1; end
      233: begin v[74] = 1'b1; v[0] = 1'b1; end
      283: begin v[12] = 1'b1; v[7] = 1'b1; v[5] = 1'b1; v[0] = 1'b1; end
      409: begin v[87] = 1'b1; v[0] = 1'b1; end
      571: begin v[10] = 1'b1; v[5] = 1'b1; v[2] = 1'b1; v[0] = 1'b1; end
      default: v = '0;
    endcase
    return v;
  endfunction

endpackage
