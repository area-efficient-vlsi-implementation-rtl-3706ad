// tb_gf2m_ctrl: sequencing of one multiplication. For several values of M
// the testbench checks that start raises load in the same cycle, that step is
// then high for exactly M consecutive cycles, that done pulses once, in the
// cycle after the last step (M+1 edges after start), that busy matches step,
// that a start given while busy is ignored, and that a start in the done cycle
// is accepted.
module tb_gf2m_ctrl;

  int checks = 0, failures = 0;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One controller and its checker per tested size.
  for (genvar gi = 0; gi < 4; gi++) begin : g_size
    localparam int unsigned M = (gi == 0) ? 2 : (gi == 1) ? 5 : (gi == 2) ? 64 : 163;

    logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
    logic load, step, busy, done;
    logic finished = 1'b0;

    gf2m_ctrl #(.M(M)) dut (
      .clk(clk), .rst_n(rst_n), .start(start),
      .load(load), .step(step), .busy(busy), .done(done)
    );

    always #5 clk = ~clk;

    task automatic expect_eq(input string what, input int got, input int exp_v);
      checks++;
      if (got != exp_v) begin
        failures++;
        $display("FAIL M=%0d %s: got %0d expected %0d", M, what, got, exp_v);
      end
    endtask

    // Run one operation from a start pulse; optionally poke start mid-way
    // and optionally restart in the done cycle.
    task automatic run_op(input bit poke_busy, input bit restart_at_done);
      int steps, edges, dones;
      steps = 0; edges = 0; dones = 0;
      @(negedge clk);
      start = 1'b1;
      #1;
      expect_eq("load with start", int'(load), 1);
      expect_eq("no step at start", int'(step), 0);
      @(posedge clk);
      @(negedge clk);
      start = 1'b0;
      // iterate until done
      while (!done && edges < 4 * M + 10) begin
        if (step) steps++;
        expect_eq("busy == step", int'(busy), int'(step));
        if (poke_busy && steps == 1) start = 1'b1; else start = 1'b0;
        #1;
        if (poke_busy && steps == 1)
          expect_eq("no load while busy", int'(load), 0);
        @(posedge clk);
        edges++;
        @(negedge clk);
      end
      start = 1'b0;
      expect_eq("steps", steps, M);
      expect_eq("edges from start to done", edges + 1, M + 1);
      expect_eq("done", int'(done), 1);
      expect_eq("no step with done", int'(step), 0);
      if (restart_at_done) begin
        start = 1'b1;
        #1;
        expect_eq("load in done cycle", int'(load), 1);
        @(posedge clk);
        @(negedge clk);
        start = 1'b0;
        expect_eq("busy after restart", int'(busy), 1);
        // drain
        while (!done) begin @(posedge clk); @(negedge clk); end
      end
      @(posedge clk);
      @(negedge clk);
      expect_eq("done is one cycle", int'(done), 0);
      expect_eq("idle after done", int'(busy), 0);
    endtask

    initial begin
      repeat (2) @(posedge clk);
      expect_eq("idle in reset", int'(busy), 0);
      rst_n = 1'b1;
      run_op(1'b0, 1'b0);
      run_op(1'b1, 1'b0);
      run_op(1'b0, 1'b1);
      // idle cycles keep everything low
      repeat (3) begin
        @(negedge clk);
        expect_eq("idle step", int'(step), 0);
        expect_eq("idle done", int'(done), 0);
      end
      finished = 1'b1;
    end
  end

  initial begin
    wait (g_size[0].finished && g_size[1].finished && g_size[2].finished && g_size[3].finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
