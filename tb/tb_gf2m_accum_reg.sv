// tb_gf2m_accum_reg: the accumulator register must clear on clear (which wins
// over en), capture d on en, hold otherwise, and read zero after reset. Random
// control pattern and data against a model kept in the testbench.
module tb_gf2m_accum_reg;

  localparam int unsigned M = gf2m_pkg::M_DEFAULT;

  logic         clk = 1'b0, rst_n = 1'b0, clear = 1'b0, en = 1'b0;
  logic [M-1:0] d = '0, q, model;
  int checks = 0, failures = 0, n_clear_en = 0;

  gf2m_accum_reg dut (.clk(clk), .rst_n(rst_n), .clear(clear), .en(en), .d(d), .q(q));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = '0;
    for (int i = 0; i < M; i++) d[i] = 1'($urandom());
    en = 1'b1;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (q !== '0) begin failures++; $display("FAIL not zero in reset"); end
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      clear = ($urandom() % 5 == 0);
      en    = ($urandom() % 2 == 0);
      for (int i = 0; i < M; i++) d[i] = 1'($urandom());
      @(posedge clk);
      if (clear && en) n_clear_en++;
      if (clear)   model = '0;
      else if (en) model = d;
      #1;
      checks++;
      if (q !== model) begin
        failures++;
        $display("FAIL n=%0d clear=%0b en=%0b got=%h exp=%h", n, clear, en, q, model);
      end
    end
    checks++;
    if (n_clear_en == 0) begin failures++; $display("FAIL clear and en never together"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
