// tb_gf2m_block_h: block H must return r XOR (b_bit AND a) bit by bit.
// Random r and a with both values of b_bit; the expected vector is built one
// bit at a time with a conditional, not with vector XOR.
module tb_gf2m_block_h;

  localparam int unsigned M = gf2m_pkg::M_DEFAULT;

  logic [M-1:0] r, a, p_next, exp_v;
  logic         b_bit;
  int checks = 0, failures = 0;

  gf2m_block_h dut (.r(r), .a(a), .b_bit(b_bit), .p_next(p_next));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      for (int i = 0; i < M; i++) begin
        r[i] = 1'($urandom());
        a[i] = 1'($urandom());
      end
      if (n == 0) a = '1;
      b_bit = n[0];
      #1;
      for (int i = 0; i < M; i++)
        exp_v[i] = (b_bit && a[i]) ? !r[i] : r[i];
      checks++;
      if (p_next !== exp_v) begin
        failures++;
        $display("FAIL b=%0b r=%h a=%h got=%h exp=%h", b_bit, r, a, p_next, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
