// tb_gf2m_sipo_mult: end-to-end test of the multiplier at its default size
// (m = 163), with no parameter override.
//
// Each operation pulses start with A on a_in, then feeds B one bit per cycle
// on b_bit, MSB first, while b_req is high, and waits for done. The product is
// compared with an LSB-first reference multiplication (gf2m_ref_pkg), and the
// timing with the specification: b_req high for exactly M cycles, done M+1
// clock edges after start, c held after done. Operands: corner cases (zero,
// one, x, x^(m-1), all ones) and random values, with the NIST polynomial and
// with random (generic) polynomials. Mechanisms counted, each of which must
// occur at least once: iterations in which the interleaved reduction fires
// (p_{m-1} = 1), a start ignored while busy (with different data on a_in), a
// start accepted in the done cycle, and operations with a generic f.
module tb_gf2m_sipo_mult;

  import gf2m_ref_pkg::*;

  localparam int unsigned M = gf2m_pkg::M_DEFAULT;
  localparam int unsigned N_RANDOM = 200;

  logic         clk = 1'b0, rst_n = 1'b0, start = 1'b0, b_bit = 1'b0;
  logic [M-1:0] a_in = '0, f = '0, c;
  logic         b_req, busy, done;

  int checks = 0, failures = 0;
  int n_reduce = 0, n_ignored_start = 0, n_back_to_back = 0, n_generic_f = 0;

  gf2m_sipo_mult dut (
    .clk(clk), .rst_n(rst_n), .start(start), .a_in(a_in), .f(f),
    .b_bit(b_bit), .b_req(b_req), .busy(busy), .done(done), .c(c)
  );

  always #5 clk = ~clk;

  // Interleaved reduction fires in an iteration whose P^(k-1) has its top bit set.
  always @(posedge clk) if (b_req && dut.u_reg2.q[M-1]) n_reduce++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // One multiplication. Called at a negedge (idle, or in the done cycle of the
  // previous operation); returns at the negedge of the cycle in which done is
  // high. With poke set, start is raised again half-way through, with the
  // complement of A on a_in, and must be ignored.
  task automatic multiply(input vec_t av, input vec_t bv, input vec_t fv, input bit poke);
    vec_t exp_v;
    int   k, edges;
    exp_v = gf_mul(av, bv, fv, M);
    f     = fv[M-1:0];
    a_in  = av[M-1:0];
    start = 1'b1;
    @(posedge clk);
    @(negedge clk);
    start = 1'b0;
    a_in  = ~av[M-1:0];
    k = 0;
    edges = 1;
    while (!done && edges < 2 * M + 10) begin
      b_bit = (k < int'(M)) ? bv[M-1-k] : 1'b0;
      if (poke && k == M / 2) begin
        start = 1'b1;
        n_ignored_start++;
      end else begin
        start = 1'b0;
      end
      @(posedge clk);
      if (b_req) k++;
      edges++;
      @(negedge clk);
    end
    start = 1'b0;
    check(done, "done never came");
    check(k == int'(M), $sformatf("b_req cycles %0d, expected %0d", k, M));
    check(edges == int'(M) + 1, $sformatf("start to done %0d edges, expected %0d", edges, M + 1));
    check(c === exp_v[M-1:0], $sformatf("product a=%h b=%h f=%h got=%h exp=%h",
                                       av[M-1:0], bv[M-1:0], fv[M-1:0], c, exp_v[M-1:0]));
  endtask

  initial begin
    vec_t nist, zero, one, xel, xtop, ones, av, bv, fv, exp_v;
    nist = gf2m_pkg::nist_poly(M);
    zero = '0;
    one  = '0; one[0] = 1'b1;
    xel  = '0; xel[1] = 1'b1;
    xtop = '0; xtop[M-1] = 1'b1;
    ones = low_mask(M);

    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    check(!busy && !done && c === '0, "idle and cleared after reset");

    multiply(zero, rand_vec(M), nist, 1'b0);
    multiply(rand_vec(M), zero, nist, 1'b0);
    av = rand_vec(M);
    multiply(av, one, nist, 1'b0);
    check(c === av[M-1:0], "A * 1 = A");
    multiply(one, one, nist, 1'b0);
    multiply(xtop, xel, nist, 1'b0);
    exp_v = nist;
    check(c === exp_v[M-1:0], "x^(m-1) * x = f_{m-1}..f_0");
    multiply(ones, ones, nist, 1'b0);
    multiply(xtop, xtop, nist, 1'b0);

    // Product holds while idle.
    exp_v = '0; exp_v[M-1:0] = c;
    repeat (5) @(negedge clk);
    check(c === exp_v[M-1:0] && !busy, "product held while idle");

    // Start while busy must be ignored.
    multiply(rand_vec(M), rand_vec(M), nist, 1'b1);

    // Start in the done cycle: back-to-back operations.
    for (int n = 0; n < 4; n++) begin
      multiply(rand_vec(M), rand_vec(M), nist, 1'b0);
      check(done, "in done cycle");
      n_back_to_back++;
      multiply(rand_vec(M), rand_vec(M), nist, 1'b0);
    end

    for (int n = 0; n < int'(N_RANDOM); n++) begin
      av = rand_vec(M);
      bv = rand_vec(M);
      if (n % 4 == 3) begin
        fv = rand_vec(M);
        fv[0] = 1'b1;
        n_generic_f++;
      end else begin
        fv = nist;
      end
      multiply(av, bv, fv, (n % 25 == 0));
      // idle gaps between some operations
      if (n % 3 == 0) repeat (n % 7) @(negedge clk);
    end

    $display("mechanisms: reductions=%0d ignored_starts=%0d back_to_back=%0d generic_f=%0d",
             n_reduce, n_ignored_start, n_back_to_back, n_generic_f);
    check(n_reduce > 0, "interleaved reduction never fired");
    check(n_ignored_start > 0, "no start while busy");
    check(n_back_to_back > 0, "no back-to-back start");
    check(n_generic_f > 0, "no generic field polynomial");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
