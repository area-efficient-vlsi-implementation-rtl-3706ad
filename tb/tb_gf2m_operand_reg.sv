// tb_gf2m_operand_reg: the operand register must capture a_in only on edges
// where load is high, hold otherwise, and read zero after reset. Random load
// pattern and data against a model kept in the testbench.
module tb_gf2m_operand_reg;

  localparam int unsigned M = gf2m_pkg::M_DEFAULT;

  logic         clk = 1'b0, rst_n = 1'b0, load = 1'b0;
  logic [M-1:0] a_in = '0, a_q, model;
  int checks = 0, failures = 0;

  gf2m_operand_reg dut (.clk(clk), .rst_n(rst_n), .load(load), .a_in(a_in), .a_q(a_q));

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
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (a_q !== '0) begin failures++; $display("FAIL not zero after reset"); end
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      load = ($urandom() % 3 == 0);
      for (int i = 0; i < M; i++) a_in[i] = 1'($urandom());
      @(posedge clk);
      if (load) model = a_in;
      #1;
      checks++;
      if (a_q !== model) begin
        failures++;
        $display("FAIL n=%0d load=%0b got=%h exp=%h", n, load, a_q, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
