// tb_vtd_pulsar: a pulsar light curve, compressed in time, through the
// full-size rate meter, folded into a phaseogram the way the host does it.
//
// The centre pixel (channel 0) sees Poisson pulses at a 1 MHz sky background
// plus a periodic signal shaped like the Crab's optical profile: a narrow
// main pulse at phase 0 (peak +4 MHz) and a weaker, wider interpulse at phase
// 0.4 (peak +1.5 MHz).  The period is shortened from 33.7 ms to 337 us so
// that 20 buffers (about 9 ms) hold 26 periods.  The guard-ring channels see
// background only.  The receiver takes 61.87 us per buffer.
//
// The host of the original instrument tags each sample with its own clock
// and folds the rates with the pulsar ephemeris.  Here the sample times come
// from the buffer writes and the ephemeris is the known period.  Each
// ordinary sample (5.5 us long) is put in one of 20 phase bins by its
// midpoint; the first sample of a buffer spans a send and is left out, as it
// is not 5.5 us long.  Checks:
//  * every stored value against the pulses sent (running sum within the
//    synchroniser lag);
//  * the brightest bin is the main pulse, bin 0;
//  * the interpulse bins (phase 0.35 to 0.45) exceed the mean rate plus five
//    standard deviations, and are below the main pulse;
//  * bins well away from both pulses are within five standard deviations of
//    the background.
module tb_vtd_pulsar;

  localparam int unsigned NCH    = vtd_pkg::NUM_CHANNELS;
  localparam int unsigned W      = vtd_pkg::SCALER_WIDTH;
  localparam int unsigned DEPTH  = vtd_pkg::SAMPLE_DEPTH;
  localparam int          PERIOD = int'(vtd_pkg::SAMPLE_PERIOD_CYCLES);
  localparam int          NWORDS = int'(DEPTH * NCH);
  localparam int          FLUSH_CYCLES = 6187;   // 61.87 us at 100 MHz
  localparam int          NBUF   = 20;
  localparam int          LAG    = 4;
  localparam int          NPH    = 20;
  localparam real         P_NS   = 337.0e3;      // compressed pulsar period
  localparam real         BKG_HZ = 1.0e6;
  localparam real         MAIN_HZ = 4.0e6, MAIN_W = 0.02;
  localparam real         INTER_HZ = 1.5e6, INTER_PH = 0.4, INTER_W = 0.03;

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

  // Phase in [0,1) of time t, and the wrapped distance between two phases.
  function automatic real phase_of(input real t_ns);
    real x;
    x = t_ns / P_NS;
    return x - $floor(x);
  endfunction

  function automatic real dphase(input real a, input real b);
    real d;
    d = a - b;
    d = d - $floor(d + 0.5);
    return d;
  endfunction

  function automatic real rate_hz(input int c, input real t_ns);
    real ph, r;
    r = BKG_HZ;
    if (c != 0) return r;
    ph = phase_of(t_ns);
    r += MAIN_HZ  * $exp(-0.5 * (dphase(ph, 0.0) / MAIN_W) ** 2);
    r += INTER_HZ * $exp(-0.5 * (dphase(ph, INTER_PH) / INTER_W) ** 2);
    return r;
  endfunction

  int sent [NCH];
  bit stop = 1'b0;

  task automatic drive(input int c);
    while (!stop) begin
      real u, gap_ns;
      u      = (real'($urandom) + 1.0) / 4294967297.0;
      gap_ns = -$ln(u) * 1.0e9 / rate_hz(c, real'($realtime));
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

  // ---- sample times, stream checks and folding
  int  hist [NCH][$];
  typedef struct { real t_ns; int lo [NCH]; int hi [NCH]; } sample_t;
  sample_t samp_q [$];
  sample_t cur;
  int  cum [NCH];
  int  n_words = 0, n_bufs = 0, n_folded = 0;
  longint ph_cnt [NPH];
  int     ph_n   [NPH];

  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      for (int c = 0; c < int'(NCH); c++) begin
        hist[c].push_back(sent[c]);
        if (hist[c].size() > LAG + 1) void'(hist[c].pop_front());
      end
      if (dut.u_sampler.buf_we_o) begin
        sample_t s;
        s.t_ns = real'($realtime);
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
        // Fold channel 0, skipping the first sample of each buffer.
        if (c == 0 && sidx % int'(DEPTH) != 0) begin
          int b;
          b = int'($floor(phase_of(cur.t_ns - 2750.0) * NPH)) % NPH;
          ph_cnt[b] += longint'(tx_data);
          ph_n[b]++;
          n_folded++;
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
    foreach (ph_cnt[b]) begin ph_cnt[b] = 0; ph_n[b] = 0; end
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < int'(NCH); c++) begin
      automatic int cc = c;
      fork drive(cc); join_none
    end
    wait (n_bufs == NBUF);
    stop = 1'b1;

    begin
      real r [NPH], sig [NPH], mean, mean_sig, sample_s;
      int  peak, inter_lo, inter_hi;
      sample_s = real'(PERIOD) * 10.0e-9;
      mean = 0.0;
      for (int b = 0; b < NPH; b++) begin
        check(ph_n[b] > 0, $sformatf("phase bin %0d empty", b));
        r[b]   = real'(ph_cnt[b]) / (real'(ph_n[b]) * sample_s);
        sig[b] = $sqrt(real'(ph_cnt[b])) / (real'(ph_n[b]) * sample_s);
        mean  += r[b] / NPH;
      end
      mean_sig = 0.0;
      for (int b = 0; b < NPH; b++) mean_sig += sig[b] / NPH;
      $display("phase  rate(MHz)  samples   (mean %0.3f MHz, 5 sigma %0.3f MHz)",
               mean / 1e6, (mean + 5.0 * mean_sig) / 1e6);
      peak = 0;
      for (int b = 0; b < NPH; b++) begin
        $display("%5.2f  %9.3f  %7d", (real'(b) + 0.5) / NPH, r[b] / 1e6, ph_n[b]);
        if (r[b] > r[peak]) peak = b;
      end
      check(peak == 0 || peak == NPH - 1, $sformatf("main pulse in bin %0d", peak));
      inter_lo = int'(0.35 * NPH);
      inter_hi = int'(0.45 * NPH) - 1;
      begin
        real best;
        best = 0.0;
        for (int b = inter_lo; b <= inter_hi; b++) if (r[b] > best) best = r[b];
        check(best > mean + 5.0 * mean_sig, "interpulse below the 5 sigma threshold");
        check(best < r[peak], "interpulse above the main pulse");
      end
      // Off-pulse bins: phases 0.15-0.25 and 0.6-0.85.
      for (int b = 0; b < NPH; b++) begin
        real ph;
        ph = (real'(b) + 0.5) / NPH;
        if ((ph > 0.15 && ph < 0.25) || (ph > 0.6 && ph < 0.85))
          check(r[b] < BKG_HZ + 5.0 * sig[b] && r[b] > BKG_HZ - 5.0 * sig[b],
                $sformatf("off-pulse bin %0d at %0.3f MHz", b, r[b] / 1e6));
      end
      $display("folded samples %0d over %0.1f pulsar periods", n_folded, real'($realtime) / P_NS);
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
