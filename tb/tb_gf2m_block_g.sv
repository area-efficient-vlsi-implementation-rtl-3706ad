// tb_gf2m_block_g: block G must return x * P(x) mod f(x). The expected value
// is the reference field product of P and the element x (vector 2), computed
// LSB first in gf2m_ref_pkg. Random P and f, plus the corner cases where the
// top bit of P is set and f is the NIST polynomial of the same degree, and
// where P is all ones. The number of cases that needed reduction (p_{m-1}=1)
// is checked to be non-zero.
module tb_gf2m_block_g;

  import gf2m_ref_pkg::*;

  localparam int unsigned M = gf2m_pkg::M_DEFAULT;

  logic [M-1:0] p, f, r;
  int checks = 0, failures = 0, reductions = 0;

  gf2m_block_g dut (.p(p), .f(f), .r(r));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(input vec_t pv, input vec_t fv);
    vec_t exp_v, x_elem;
    x_elem = '0;
    x_elem[1] = 1'b1;
    p = pv[M-1:0];
    f = fv[M-1:0];
    #1;
    exp_v = gf_mul(pv, x_elem, fv, M);
    checks++;
    if (p[M-1]) reductions++;
    if (r !== exp_v[M-1:0]) begin
      failures++;
      $display("FAIL p=%h f=%h r=%h exp=%h", p, f, r, exp_v[M-1:0]);
    end
  endtask

  initial begin
    vec_t pv, fv;
    fv = gf2m_pkg::nist_poly(M);
    pv = '0; pv[M-1] = 1'b1;
    check_one(pv, fv);
    check_one(low_mask(M), fv);
    check_one('0, fv);
    for (int n = 0; n < 500; n++) begin
      pv = rand_vec(M);
      fv = (n % 2 == 0) ? vec_t'(gf2m_pkg::nist_poly(M)) : rand_vec(M);
      check_one(pv, fv);
    end
    checks++;
    if (reductions == 0) begin
      failures++;
      $display("FAIL no case exercised the reduction");
    end
    $display("reductions=%0d", reductions);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
