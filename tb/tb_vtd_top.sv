// tb_vtd_top: end-to-end run of the rate meter at its full size (7 channels,
// 16-bit scalers, 5.5 us sampling, 70-sample buffer), over five buffers.
//
// Stimulus.  Seven random pulse trains: channel 0 near the 35 MHz
// discriminator limit, so that its 16-bit scaler wraps during the run, and
// the guard-ring channels at rates from a few kHz to a few MHz.  A receiver
// model stands in for the Ethernet interface: it spreads the 490 words of a
// buffer evenly over 61.87 us, the send time of the published instrument, so
// the stream stalls between words.
//
// Checks, all against the testbench's own pulse counts:
//  * every stored value, summed per channel over all samples so far, lies
//    between the pulses sent 4 cycles before the sample and those sent by it
//    (the scaler synchroniser delay), so no count is lost or invented, even
//    across a flush or a scaler wrap;
//  * samples within a buffer are exactly 550 cycles apart and all fall on one
//    550-cycle grid; the first sample after a flush is the first grid point
//    after it;
//  * strobes falling in a flush are counted in missed_ticks_o;
//  * tx_last marks word 490 of each buffer;
//  * one buffer period is about 0.45 ms and the dead time is about 15%.
// Each mechanism (sampling, flush, missed strobe, late sample, scaler wrap,
// stream stall) is counted and must have happened at least once.
module tb_vtd_top;

  localparam int unsigned NCH      = vtd_pkg::NUM_CHANNELS;
  localparam int unsigned W        = vtd_pkg::SCALER_WIDTH;
  localparam int unsigned DEPTH    = vtd_pkg::SAMPLE_DEPTH;
  localparam int          PERIOD   = int'(vtd_pkg::SAMPLE_PERIOD_CYCLES);
  localparam int          NWORDS   = int'(DEPTH * NCH);
  localparam int          FLUSH_CYCLES = 6187;   // 61.87 us at 100 MHz
  localparam int          NBUF     = 5;
  localparam int          LAG      = 4;

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

  // ---- pulse trains: gaps in [gmin, gmax] ns, 2 ns high
  int  sent [NCH];
  bit  stop = 1'b0;

  task automatic drive(input int c, input int gmin, input int gmax);
    while (!stop) begin
      #($urandom_range(gmax, gmin));
      pulse[c] = 1'b1;
      sent[c]++;
      #2 pulse[c] = 1'b0;
    end
  endtask

  // ---- per-cycle history of pulses sent
  int cyc = 0;
  int hist [NCH][$];

  // ---- samples taken (seen on the buffer write), in order
  typedef struct { int t; int lo [NCH]; int hi [NCH]; } sample_t;
  sample_t samp_q [$];
  int  take_t [$];
  int  grid0 = -1;

  // ---- receiver and stream checks
  int  word_idx = 0, buf_start = 0, n_words = 0;
  int  cum [NCH];
  sample_t cur;
  int  n_samples = 0, n_flushes = 0, n_missed = 0, n_late = 0, n_stall = 0;
  int  flush_rise = 0, flush_fall = -1;
  int  flush_len [$], buf_period [$];
  bit  flushing_d = 1'b0;
  int  last_first_take = -1;

  // Receiver: word k of a buffer is taken no earlier than (k+1)/490 of the
  // send time after the buffer's first word was offered.
  bit started = 1'b0;
  always @(negedge clk) begin
    if (tx_valid && !started) begin
      started   = 1'b1;
      buf_start = cyc;
    end
    tx_ready <= tx_valid && started &&
                (cyc - buf_start >= ((word_idx + 1) * FLUSH_CYCLES) / NWORDS);
  end

  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      for (int c = 0; c < int'(NCH); c++) begin
        hist[c].push_back(sent[c]);
        if (hist[c].size() > LAG + 1) void'(hist[c].pop_front());
      end

      // A sample is taken.
      if (dut.u_sampler.buf_we_o) begin
        sample_t s;
        s.t = cyc;
        for (int c = 0; c < int'(NCH); c++) begin
          s.lo[c] = hist[c][0];
          s.hi[c] = sent[c];
        end
        samp_q.push_back(s);
        if (grid0 < 0) grid0 = cyc % PERIOD;
        check(cyc % PERIOD == grid0, "sample off the strobe grid");
        if (take_t.size() > 0) begin
          int gap;
          gap = cyc - take_t[$];
          if (flush_fall >= 0 && take_t[$] < flush_fall) begin
            // First sample after a flush: first grid point after it ended.
            n_late++;
            check(cyc > flush_fall && cyc - flush_fall <= PERIOD, "late sample not at first strobe after flush");
            check(gap > PERIOD, "late sample gap");
          end else begin
            check(gap == PERIOD, $sformatf("sample gap %0d cycles, expected %0d", gap, PERIOD));
          end
        end
        if (n_samples % int'(DEPTH) == 0) begin
          if (last_first_take >= 0) buf_period.push_back(cyc - last_first_take);
          last_first_take = cyc;
        end
        take_t.push_back(cyc);
        n_samples++;
      end

      // Strobes in a flush.
      if (grid0 >= 0 && cyc % PERIOD == grid0 && flushing) n_missed++;

      // Flush edges.
      if (flushing && !flushing_d) flush_rise = cyc;
      if (!flushing && flushing_d) begin
        flush_fall = cyc;
        flush_len.push_back(cyc - flush_rise);
        n_flushes++;
      end
      flushing_d = flushing;

      // Stream words.
      if (tx_valid && !tx_ready) n_stall++;
      if (tx_valid && tx_ready) begin
        int c;
        c = n_words % int'(NCH);
        if (c == 0) begin
          check(samp_q.size() > 0, "word for a sample never taken");
          if (samp_q.size() > 0) cur = samp_q.pop_front();
        end
        cum[c] += int'(tx_data);
        check(cum[c] >= cur.lo[c] && cum[c] <= cur.hi[c],
              $sformatf("ch%0d total %0d outside [%0d,%0d] at sample %0d", c, cum[c], cur.lo[c], cur.hi[c], n_words / NCH));
        check(tx_last == (word_idx == NWORDS - 1), "tx_last misplaced");
        n_words++;
        if (word_idx == NWORDS - 1) begin
          word_idx = 0;
          started  = 1'b0;
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
    fork
      drive(0, 2, 55);          // ~35 MHz: the discriminator limit
      drive(1, 100, 900);       // ~2 MHz
      drive(2, 400, 2000);      // ~0.8 MHz
      drive(3, 20, 200);        // ~9 MHz
      drive(4, 5000, 300000);   // a few kHz
      drive(5, 50, 500);        // ~3.6 MHz
      drive(6, 1000, 1500);     // ~0.8 MHz
    join_none
    wait (n_flushes == NBUF);
    stop = 1'b1;
    repeat (2) @(posedge clk);

    check(n_words == NBUF * NWORDS, $sformatf("%0d words, expected %0d", n_words, NBUF * NWORDS));
    check(int'(missed) == n_missed, $sformatf("missed_ticks_o %0d, counted %0d", missed, n_missed));
    foreach (flush_len[i]) begin
      check(flush_len[i] >= FLUSH_CYCLES && flush_len[i] <= FLUSH_CYCLES + 20,
            $sformatf("flush %0d lasted %0d cycles", i, flush_len[i]));
    end
    foreach (buf_period[i]) begin
      real ms, dead;
      ms   = real'(buf_period[i]) * 10.0e-6;   // 10 ns per cycle, in ms
      dead = real'(flush_len[i]) / real'(buf_period[i]);
      check(ms > 0.44 && ms < 0.46, $sformatf("buffer period %0.4f ms", ms));
      check(dead > 0.12 && dead < 0.16, $sformatf("dead time %0.3f", dead));
      if (i == 0) $display("buffer period %0.4f ms, flush %0d cycles, dead time %0.1f%%",
                           ms, flush_len[i], 100.0 * dead);
    end
    check(cum[0] > 65536, "channel 0 scaler did not wrap");
    // Channel 0 rate over the run, from the stored counts only.
    begin
      real rate;
      rate = real'(cum[0]) / (real'(take_t[NBUF*DEPTH-1] - take_t[0]) * 10.0e-9);
      $display("channel 0 mean rate %0.1f MHz", rate / 1.0e6);
      check(rate > 30.0e6, "channel 0 rate below 30 MHz");
    end

    $display("samples=%0d flushes=%0d missed_strobes=%0d late_samples=%0d stalls=%0d ch0_pulses=%0d",
             n_samples, n_flushes, n_missed, n_late, n_stall, sent[0]);
    check(n_samples > 0, "no sample");
    check(n_flushes > 0, "no flush");
    check(n_missed > 0,  "no strobe missed during a flush");
    check(n_late > 0,    "no sample after a flush");
    check(n_stall > 0,   "stream never stalled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NBUF * 50_000 + 10_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
