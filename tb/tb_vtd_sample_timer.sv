// tb_vtd_sample_timer: checks the sampling strobe of vtd_sample_timer at its
// default period (550 cycles, 5.5 us at 100 MHz): the first strobe comes
// PERIOD cycles after reset is released, each strobe lasts one cycle, and
// strobes repeat exactly every PERIOD cycles.  A reset in the middle of a
// period must restart the count.
module tb_vtd_sample_timer;

  localparam int unsigned PERIOD  = 550;
  localparam int unsigned NTICKS  = 12;

  logic clk = 1'b0;
  logic rst_n = 1'b1;  // falls at time 1, so the asynchronous resets see an edge
  logic tick;

  int checks = 0, failures = 0;

  vtd_sample_timer dut (.clk_i(clk), .rst_ni(rst_n), .tick_o(tick));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Cycle counter since reset release; strobe cycles are logged.
  int cyc;
  int tick_cyc[$];
  always @(posedge clk) begin
    if (!rst_n) cyc <= 0;
    else begin
      cyc <= cyc + 1;
      if (tick) tick_cyc.push_back(cyc);
    end
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (PERIOD * NTICKS + 5) @(posedge clk);
    check(tick_cyc.size() == NTICKS, $sformatf("%0d strobes, expected %0d", tick_cyc.size(), NTICKS));
    foreach (tick_cyc[i]) begin
      // cyc counts cycles already completed, so the strobe seen at the
      // PERIOD-th edge after release has cyc == PERIOD-1.
      check(tick_cyc[i] == int'(PERIOD) * (i + 1) - 1,
            $sformatf("strobe %0d at cycle %0d, expected %0d", i, tick_cyc[i], int'(PERIOD) * (i + 1) - 1));
    end
    // Reset in the middle of a period restarts it.
    repeat (100) @(posedge clk);
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    tick_cyc.delete();
    repeat (PERIOD + 2) @(posedge clk);
    check(tick_cyc.size() == 1 && tick_cyc[0] == int'(PERIOD) - 1,
          "strobe after mid-period reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Strobes last exactly one cycle.
  logic tick_d;
  always @(posedge clk) begin
    tick_d <= tick;
    if (rst_n && tick && tick_d) begin
      failures++;
      $display("FAIL: strobe longer than one cycle");
    end
  end

  initial begin
    repeat (PERIOD * (NTICKS + 4)) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
