// tb_vtd_rate_limit: the full-size rate meter at the rate limits quoted for
// the instrument.
//
// Channel 0 receives a regular pulse train at 400 MHz (one pulse every
// 2.5 ns), the limit quoted for the scalers; channels 1 to 6 receive Poisson
// pulses at 35 MHz, the limit of the discriminators.  The receiver takes
// 61.87 us per buffer.  Over three buffers the channel 0 scaler wraps many
// times, and the sample after each flush holds about 67 us of counts (about
// 27,000 at 400 MHz), still inside the 16-bit stored difference.
//
// Checks: every stored value, summed per channel, within the synchroniser lag
// of the pulses sent (nothing lost across wraps or flushes); the normal
// channel 0 value is 2200 +- 3 (5.5 us at 400 MHz); the sample after a flush
// holds between 25,000 and 28,000 on channel 0.
module tb_vtd_rate_limit;

  localparam int unsigned NCH    = vtd_pkg::NUM_CHANNELS;
  localparam int unsigned W      = vtd_pkg::SCALER_WIDTH;
  localparam int unsigned DEPTH  = vtd_pkg::SAMPLE_DEPTH;
  localparam int          NWORDS = int'(DEPTH * NCH);
  localparam int          FLUSH_CYCLES = 6187;   // 61.87 us at 100 MHz
  localparam int          NBUF   = 3;
  localparam int          LAG    = 4;

  logic           clk = 1'b0;
  logic           rst_n = 1'b1;  // falls at time 1, so the asynchronous resets see an edge
  logic [NCH-1:0] pulse = '0;
  logic [W-1:0]   tx_data;
  logic           tx_valid, tx_last;
  logic           tx_ready = 1'b0;
  logic           flushing;
  logic [31:0]    missed;

  int checks = 0, failures = 0;

  vtd_top dut (
    .clk_i(clk), .rst_ni(rst_n), .pulse_i(pulse),
    .tx_data_o(tx_data), .tx_valid_o(tx_valid), .tx_last_o(tx_last), .tx_ready_i(tx_ready),
    .flushing_o(flushing), .missed_ticks_o(missed)
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  int sent [NCH];
  bit stop = 1'b0;

  // 400 MHz: 1.25 ns high, 1.25 ns low.
  task automatic drive_fast();
    while (!stop) begin
      #1.25 pulse[0] = 1'b1;
      sent[0]++;
      #1.25 pulse[0] = 1'b0;
    end
  endtask

  // Poisson at 35 MHz, at least 3 ns between pulses.
  task automatic drive_poisson(input int c);
    while (!stop) begin
      real u, gap_ns;
      u      = (real'($urandom) + 1.0) / 4294967297.0;
      gap_ns = -$ln(u) * 1.0e9 / 35.0e6;
      if (gap_ns < 3.0) gap_ns = 3.0;
      #(gap_ns);
      pulse[c] = 1'b1;
      sent[c]++;
      #1 pulse[c] = 1'b0;
    end
  endtask

  // ---- receiver: one buffer over 61.87 us
  int  cyc = 0, buf_start = 0, word_idx = 0;
  bit  started = 1'b0;
  always @(negedge clk) begin
    if (tx_valid && !started) begin
      started   = 1'b1;
      buf_start = cyc;
    end
    tx_ready <= tx_valid && started &&
                (cyc - buf_start >= ((word_idx + 1) * FLUSH_CYCLES) / NWORDS);
  end

  // ---- checks
  int  hist [NCH][$];
  typedef struct { int t; int lo [NCH]; int hi [NCH]; } sample_t;
  sample_t samp_q [$];
  sample_t cur;
  int  cum [NCH];
  int  n_words = 0, n_bufs = 0, n_normal = 0, n_late = 0;
  longint cum_total [NCH];

  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      for (int c = 0; c < int'(NCH); c++) begin
        hist[c].push_back(sent[c]);
        if (hist[c].size() > LAG + 1) void'(hist[c].pop_front());
      end
      if (dut.u_sampler.buf_we_o) begin
        sample_t s;
        s.t = cyc;
        for (int c = 0; c < int'(NCH); c++) begin
          s.lo[c] = hist[c][0];
          s.hi[c] = sent[c];
        end
        samp_q.push_back(s);
      end
      if (tx_valid && tx_ready) begin
        int c, sidx;
        c    = n_words % int'(NCH);
        sidx = n_words / int'(NCH);
        if (c == 0 && samp_q.size() > 0) cur = samp_q.pop_front();
        cum[c] += int'(tx_data);
        check(cum[c] >= cur.lo[c] && cum[c] <= cur.hi[c],
              $sformatf("ch%0d total %0d outside [%0d,%0d]", c, cum[c], cur.lo[c], cur.hi[c]));
        if (c == 0 && sidx > 0) begin
          if (sidx % int'(DEPTH) == 0) begin
            // First sample of a buffer after a flush.
            n_late++;
            check(int'(tx_data) > 25_000 && int'(tx_data) < 28_000,
                  $sformatf("sample after flush holds %0d on channel 0", tx_data));
          end else begin
            n_normal++;
            check(int'(tx_data) >= 2197 && int'(tx_data) <= 2203,
                  $sformatf("sample %0d holds %0d on channel 0", sidx, tx_data));
          end
        end
        n_words++;
        if (word_idx == NWORDS - 1) begin
          word_idx = 0;
          started  = 1'b0;
          n_bufs++;
        end else begin
          word_idx++;
        end
      end
    end
  end

  initial begin
    foreach (sent[c]) sent[c] = 0;
    foreach (cum[c])  cum[c] = 0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    fork drive_fast(); join_none
    for (int c = 1; c < int'(NCH); c++) begin
      automatic int cc = c;
      fork drive_poisson(cc); join_none
    end
    wait (n_bufs == NBUF);
    stop = 1'b1;
    $display("pulses sent: ch0 %0d (scaler wrapped %0d times), ch1 %0d; late samples %0d, normal %0d",
             sent[0], sent[0] >> W, sent[1], n_late, n_normal);
    check(n_late == NBUF - 1, "late samples");
    check(n_normal > 0, "no normal sample");
    check((sent[0] >> W) > 5, "channel 0 scaler did not wrap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NBUF * 50_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
