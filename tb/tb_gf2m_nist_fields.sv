// tb_gf2m_nist_fields: the multiplier at each of the five NIST binary field
// sizes, m = 163, 233, 283, 409 and 571, with the matching reduction
// polynomial. For each size, random products are compared with the LSB-first
// reference, the start-to-done latency is checked to be m+1 clock edges, and
// two field identities are checked on the hardware: x^(m-1) * x = f(x) - x^m,
// and (a*b)*c = a*(b*c) for random a, b, c.
module tb_gf2m_nist_fields;

  import gf2m_ref_pkg::*;

  localparam int unsigned N_FIELDS = 5;
  localparam int unsigned N_OPS    = 40;

  int checks = 0, failures = 0;

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar gi = 0; gi < N_FIELDS; gi++) begin : g_field
    localparam int unsigned M = (gi == 0) ? 163 : (gi == 1) ? 233 : (gi == 2) ? 283 :
                                (gi == 3) ? 409 : 571;

    logic         clk = 1'b0, rst_n = 1'b0, start = 1'b0, b_bit = 1'b0;
    logic [M-1:0] a_in = '0, f, c;
    logic         b_req, busy, done;
    logic         finished = 1'b0;

    gf2m_sipo_mult #(.M(M)) dut (
      .clk(clk), .rst_n(rst_n), .start(start), .a_in(a_in), .f(f),
      .b_bit(b_bit), .b_req(b_req), .busy(busy), .done(done), .c(c)
    );

    always #5 clk = ~clk;

    task automatic check(input bit ok, input string what);
      checks++;
      if (!ok) begin
        failures++;
        $display("FAIL m=%0d %s", M, what);
      end
    endtask

    // Multiply on the hardware; returns the product.
    task automatic hw_mul(input vec_t av, input vec_t bv, output vec_t cv);
      int k, edges;
      a_in  = av[M-1:0];
      start = 1'b1;
      @(posedge clk);
      @(negedge clk);
      start = 1'b0;
      k = 0;
      edges = 1;
      while (!done && edges < 2 * M + 10) begin
        b_bit = (k < int'(M)) ? bv[M-1-k] : 1'b0;
        @(posedge clk);
        if (b_req) k++;
        edges++;
        @(negedge clk);
      end
      check(edges == int'(M) + 1 && k == int'(M), $sformatf("latency %0d edges", edges));
      cv = '0;
      cv[M-1:0] = c;
    endtask

    initial begin
      vec_t fv, av, bv, cv, r1, r2, xel, xtop;
      fv = gf2m_pkg::nist_poly(M);
      f  = fv[M-1:0];
      repeat (2) @(posedge clk);
      @(negedge clk);
      rst_n = 1'b1;

      xel = '0; xel[1] = 1'b1;
      xtop = '0; xtop[M-1] = 1'b1;
      hw_mul(xtop, xel, cv);
      check(cv === fv, "x^(m-1) * x");

      for (int n = 0; n < int'(N_OPS); n++) begin
        av = rand_vec(M);
        bv = rand_vec(M);
        hw_mul(av, bv, cv);
        check(cv === gf_mul(av, bv, fv, M), $sformatf("product a=%h b=%h", av, bv));
      end

      for (int n = 0; n < 5; n++) begin
        vec_t cc;
        av = rand_vec(M);
        bv = rand_vec(M);
        cc = rand_vec(M);
        hw_mul(av, bv, r1);
        hw_mul(r1, cc, r1);
        hw_mul(bv, cc, r2);
        hw_mul(av, r2, r2);
        check(r1 === r2, "associativity");
      end
      $display("field m=%0d done", M);
      finished = 1'b1;
    end
  end

  initial begin
    wait (g_field[0].finished && g_field[1].finished && g_field[2].finished &&
          g_field[3].finished && g_field[4].finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
