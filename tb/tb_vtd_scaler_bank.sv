// tb_vtd_scaler_bank: drives the seven scaler inputs with pulse trains of
// different rates, some faster than the 100 MHz system clock (up to one pulse
// every 4 ns, 250 MHz), and checks the counts in the clock domain.
//
// The testbench counts the pulses it sends and keeps that count for every
// clock cycle.  Each cycle, every channel's count_o must lie between the
// pulses sent 4 cycles earlier and the pulses sent by now (the synchroniser
// delay), and may never go backwards.  When all pulses have stopped, each
// count must equal the pulses sent, modulo 2^16.  Channel 3 receives more
// than 2^16 pulses to show the wrap.
module tb_vtd_scaler_bank;

  localparam int unsigned NCH = 7;
  localparam int unsigned W   = 16;
  localparam int unsigned LAG = 4;

  logic                  clk = 1'b0;
  logic                  rst_n = 1'b1;  // falls at time 1, so the asynchronous resets see an edge
  logic [NCH-1:0]        pulse = '0;
  logic [NCH-1:0][W-1:0] count;

  int checks = 0, failures = 0;
  int sent [NCH];

  vtd_scaler_bank dut (.clk_i(clk), .rst_ni(rst_n), .pulse_i(pulse), .count_o(count));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // One channel's pulse train: n pulses, gaps in [gmin, gmax] time units
  // (1 unit = 1 ns with the 10-unit clock period), 2 units high.
  task automatic drive(input int c, input int n, input int gmin, input int gmax);
    for (int i = 0; i < n; i++) begin
      #($urandom_range(gmax, gmin));
      pulse[c] = 1'b1;
      sent[c]++;
      #2 pulse[c] = 1'b0;
    end
  endtask

  // Sent-count history, one entry per clock, for the bounded-lag check.
  int hist [NCH][$];
  bit running = 1'b0;
  logic [NCH-1:0][W-1:0] prev;

  always @(posedge clk) begin
    if (running) begin
      for (int c = 0; c < int'(NCH); c++) begin
        int lo, hi, n;
        hist[c].push_back(sent[c]);
        n  = hist[c].size();
        hi = sent[c];
        lo = (n > int'(LAG)) ? hist[c][n-1-LAG] : 0;
        // Only before the wrap, where counts compare as plain integers.
        if (hi < (1 << W)) begin
          check(int'(count[c]) >= lo && int'(count[c]) <= hi,
                $sformatf("ch%0d count %0d outside [%0d,%0d]", c, count[c], lo, hi));
          check(count[c] >= prev[c], $sformatf("ch%0d count went back", c));
        end
        prev[c] = count[c];
        if (n > 8) void'(hist[c].pop_front());
      end
    end
  end

  initial begin
    foreach (sent[c]) sent[c] = 0;
    prev = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    check(count == '0, "counts not zero after reset");
    running = 1'b1;
    fork
      drive(0, 3000, 20, 60);     // ~25 MHz
      drive(1, 500, 100, 400);    // ~4 MHz
      drive(2, 4000, 2, 30);      // up to 250 MHz bursts
      drive(3, 70000, 2, 3);      // ~220 MHz, wraps the 16-bit scaler
      drive(4, 10, 1000, 3000);   // slow
      drive(5, 2000, 5, 90);
      drive(6, 0, 0, 0);          // no pulses at all
    join
    repeat (6) @(posedge clk);
    for (int c = 0; c < int'(NCH); c++)
      check(count[c] == W'(sent[c]),
            $sformatf("ch%0d final count %0d, sent %0d mod 2^16 = %0d", c, count[c], sent[c], W'(sent[c])));
    check(sent[3] > (1 << W), "channel 3 did not wrap");
    running = 1'b0;
    // Reset clears the counters.
    #1 rst_n = 1'b0;
    @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (4) @(posedge clk);
    check(count == '0, "counts not zero after second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
