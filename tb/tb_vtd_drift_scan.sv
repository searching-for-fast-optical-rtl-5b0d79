// tb_vtd_drift_scan: a drift scan, compressed in time, through the full-size
// rate meter.
//
// A star crosses three pixels in turn: guard-ring channel 2, the centre
// pixel (channel 0) and guard-ring channel 5.  Each of the three sees Poisson
// pulses whose rate follows a Gaussian in time, peaking at 2 MHz, on top of a
// 50 kHz background that every channel has.  On the sky the crossing takes
// about a minute; here the three peaks are 1.3 ms apart so that the run lasts
// 16 buffers (about 7 ms).  The receiver takes 61.87 us per buffer.
//
// The testbench then does what the host does with the data: it sums the 70
// stored values of each buffer per channel and divides by the buffer period,
// giving one rate point per 0.45 ms bin.  It checks:
//  * every stored value against the pulses the testbench sent (running sum
//    within the synchroniser lag, as in the end-to-end testbench);
//  * the three peaks appear in the order 2, 0, 5, in the expected bins, at
//    2 MHz less at most 25% (a 0.45 ms bin averages the peak down);
//  * channels 1, 3, 4 and 6 stay at background level.
module tb_vtd_drift_scan;

  localparam int unsigned NCH    = vtd_pkg::NUM_CHANNELS;
  localparam int unsigned W      = vtd_pkg::SCALER_WIDTH;
  localparam int unsigned DEPTH  = vtd_pkg::SAMPLE_DEPTH;
  localparam int          NWORDS = int'(DEPTH * NCH);
  localparam int          FLUSH_CYCLES = 6187;   // 61.87 us at 100 MHz
  localparam int          NBUF   = 16;
  localparam int          LAG    = 4;
  localparam real         PEAK_HZ  = 2.0e6;
  localparam real         BKG_HZ   = 50.0e3;
  localparam real         SIGMA_NS = 500.0e3;    // 0.5 ms
  localparam real         T2_NS = 2.0e6, T0_NS = 3.3e6, T5_NS = 4.6e6;

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

  // ---- star profile and Poisson pulse trains
  function automatic real rate_hz(input int c, input real t_ns);
    real r, centre;
    r = BKG_HZ;
    case (c)
      2: centre = T2_NS;
      0: centre = T0_NS;
      5: centre = T5_NS;
      default: return r;
    endcase
    return r + PEAK_HZ * $exp(-0.5 * ((t_ns - centre) / SIGMA_NS) ** 2);
  endfunction

  int sent [NCH];
  bit stop = 1'b0;

  task automatic drive(input int c);
    while (!stop) begin
      real u, gap_ns;
      u      = (real'($urandom) + 1.0) / 4294967297.0;
      gap_ns = -$ln(u) * 1.0e9 / rate_hz(c, real'($realtime));
      if (gap_ns < 3.0) gap_ns = 3.0;     // discriminator output width
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

  // ---- sample bookkeeping and stream checks
  int  hist [NCH][$];
  typedef struct { int t; int lo [NCH]; int hi [NCH]; } sample_t;
  sample_t samp_q [$];
  sample_t cur;
  int  cum [NCH];
  int  bin_cnt [NBUF][NCH];
  int  buf_first_t [NBUF+1];
  int  n_samples = 0, n_words = 0, n_bufs = 0;

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
        if (n_samples % int'(DEPTH) == 0 && n_samples / int'(DEPTH) <= NBUF)
          buf_first_t[n_samples / int'(DEPTH)] = cyc;
        n_samples++;
      end
      if (tx_valid && tx_ready) begin
        int c;
        c = n_words % int'(NCH);
        if (c == 0 && samp_q.size() > 0) cur = samp_q.pop_front();
        cum[c] += int'(tx_data);
        if (n_bufs < NBUF) bin_cnt[n_bufs][c] += int'(tx_data);
        check(cum[c] >= cur.lo[c] && cum[c] <= cur.hi[c],
              $sformatf("ch%0d total %0d outside [%0d,%0d]", c, cum[c], cur.lo[c], cur.hi[c]));
        n_words++;
        if (word_idx == NWORDS - 1) begin
          check(tx_last, "tx_last missing");
          word_idx = 0;
          started  = 1'b0;
          n_bufs++;
        end else begin
          word_idx++;
        end
      end
    end
  end

  // Bin with the highest rate for a channel.
  function automatic int peak_bin(input int c);
    int b;
    b = 0;
    for (int i = 1; i < NBUF; i++) if (bin_cnt[i][c] > bin_cnt[b][c]) b = i;
    return b;
  endfunction

  initial begin
    foreach (sent[c]) sent[c] = 0;
    foreach (cum[c])  cum[c] = 0;
    foreach (bin_cnt[b, c]) bin_cnt[b][c] = 0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < int'(NCH); c++) begin
      automatic int cc = c;
      fork drive(cc); join_none
    end
    wait (n_bufs == NBUF);
    stop = 1'b1;

    // Host-side light curve: counts per buffer over the buffer period.
    // Buffer b's values cover the time from the sample before its first
    // sample up to its last sample, i.e. one buffer period.
    begin
      real period_s, r [NBUF][NCH];
      int  p2, p0, p5;
      period_s = real'(buf_first_t[1] - buf_first_t[0]) * 10.0e-9;
      $display("bin  ch2(MHz)  ch0(MHz)  ch5(MHz)  others(kHz, mean)");
      for (int b = 0; b < NBUF; b++) begin
        real o;
        for (int c = 0; c < int'(NCH); c++) r[b][c] = real'(bin_cnt[b][c]) / period_s;
        o = (r[b][1] + r[b][3] + r[b][4] + r[b][6]) / 4.0;
        $display("%3d  %8.3f  %8.3f  %8.3f  %8.1f", b, r[b][2] / 1e6, r[b][0] / 1e6, r[b][5] / 1e6, o / 1e3);
        for (int c = 1; c < int'(NCH); c++)
          if (c != 2 && c != 5)
            check(r[b][c] < 150.0e3, $sformatf("bin %0d ch%0d rate %0.0f Hz, background only expected", b, c, r[b][c]));
      end
      p2 = peak_bin(2); p0 = peak_bin(0); p5 = peak_bin(5);
      $display("peaks in bins: ch2 %0d, ch0 %0d, ch5 %0d", p2, p0, p5);
      check(p2 < p0 && p0 < p5, "peaks not in the order 2, 0, 5");
      // Expected bin of each peak from the buffer timing.
      check(p2 == int'(T2_NS / (period_s * 1.0e9)) || p2 == int'(T2_NS / (period_s * 1.0e9)) - 1 ||
            p2 == int'(T2_NS / (period_s * 1.0e9)) + 1, "ch2 peak bin");
      check(p5 - p2 >= 5 && p5 - p2 <= 7, "ch2 to ch5 peak distance");
      check(r[p2][2] > 0.75 * PEAK_HZ && r[p2][2] < 1.15 * (PEAK_HZ + BKG_HZ), "ch2 peak rate");
      check(r[p0][0] > 0.75 * PEAK_HZ && r[p0][0] < 1.15 * (PEAK_HZ + BKG_HZ), "ch0 peak rate");
      check(r[p5][5] > 0.75 * PEAK_HZ && r[p5][5] < 1.15 * (PEAK_HZ + BKG_HZ), "ch5 peak rate");
    end
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
