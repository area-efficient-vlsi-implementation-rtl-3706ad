// tb_gf2m_nand_xor: exhaustive check of the four-NAND XOR cell against the
// XOR truth table, written out as constants, each input pair applied several
// times in random order.
module tb_gf2m_nand_xor;

  logic a, b, y;
  int   checks = 0, failures = 0;

  // Truth table of XOR indexed by {a, b}.
  localparam logic [3:0] XOR_TT = 4'b0110;

  gf2m_nand_xor dut (.a(a), .b(b), .y(y));

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 32; n++) begin
      logic [1:0] sel;
      sel = (n < 4) ? n[1:0] : 2'($urandom());
      {a, b} = sel;
      #1;
      checks++;
      if (y !== XOR_TT[sel]) begin
        failures++;
        $display("FAIL a=%0b b=%0b y=%0b", a, b, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
