// tb_vtd_sampler: checks the sampler with a real sample buffer, at a reduced
// depth of 5 samples so that many buffers pass in a short run.
//
// The testbench plays the scalers (seven free-running 16-bit counts that it
// advances at random, starting close to the wrap) and the sampling strobe,
// and receives the word stream with its own ready pattern.  An independent
// model decides which strobes are taken (none between the strobe that fills
// the buffer and the last word of the flush), works out the expected word for
// every channel of every taken sample (count now minus count at the previous
// taken sample, modulo 2^16) and checks, cycle by cycle: the words and their
// order, tx_last, flushing_o, and at the end the missed-strobe count.  In the
// first phase the receiver is always ready and each flush must last exactly
// DEPTH*(NUM_CHANNELS+2) cycles; in the second the receiver stalls at random.
module tb_vtd_sampler;

  localparam int unsigned NCH   = 7;
  localparam int unsigned W     = 16;
  localparam int unsigned DEPTH = 5;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned FLUSH_CYCLES = DEPTH * (NCH + 2);

  logic                  clk = 1'b0;
  logic                  rst_n = 1'b1;  // falls at time 1, so the asynchronous resets see an edge
  logic                  tick = 1'b0;
  logic [NCH-1:0][W-1:0] cnt;
  logic                  we, re;
  logic [AW-1:0]         waddr, raddr;
  logic [NCH-1:0][W-1:0] wdata, rdata;
  logic [W-1:0]          tx_data;
  logic                  tx_valid, tx_last;
  logic                  tx_ready = 1'b0;
  logic                  flushing;
  logic [31:0]           missed;

  int checks = 0, failures = 0;

  vtd_sampler #(.NUM_CHANNELS(NCH), .SCALER_WIDTH(W), .DEPTH(DEPTH)) dut (
    .clk_i(clk), .rst_ni(rst_n), .tick_i(tick), .count_i(cnt),
    .buf_we_o(we), .buf_waddr_o(waddr), .buf_wdata_o(wdata),
    .buf_re_o(re), .buf_raddr_o(raddr), .buf_rdata_i(rdata),
    .tx_data_o(tx_data), .tx_valid_o(tx_valid), .tx_last_o(tx_last), .tx_ready_i(tx_ready),
    .flushing_o(flushing), .missed_ticks_o(missed)
  );

  vtd_sample_buffer #(.NUM_CHANNELS(NCH), .SCALER_WIDTH(W), .DEPTH(DEPTH)) u_buf (
    .clk_i(clk), .we_i(we), .waddr_i(waddr), .wdata_i(wdata),
    .re_i(re), .raddr_i(raddr), .rdata_o(rdata)
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // ---- stimulus knobs, changed by the main sequence
  int  tick_period = 20;
  int  ready_pct   = 100;

  // ---- reference model
  logic [NCH-1:0][W-1:0] m_last;
  logic [W-1:0]          exp_q [$];
  bit   m_flush = 1'b0;
  int   m_n = 0, m_missed = 0, m_words = 0;
  int   cyc = 0, flush_start = 0;
  int   n_samples = 0, n_flushes = 0, n_stalls = 0, n_late = 0, n_wraps = 0;
  int   flush_len [$];
  bit   missed_since_flush = 1'b0;

  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      check(flushing == m_flush, "flushing_o differs from model");
      if (tick) begin
        if (!m_flush) begin
          for (int c = 0; c < int'(NCH); c++) begin
            exp_q.push_back(cnt[c] - m_last[c]);
            if (cnt[c] < m_last[c]) n_wraps++;
          end
          if (missed_since_flush) n_late++;
          missed_since_flush = 1'b0;
          m_last = cnt;
          n_samples++;
          if (++m_n == int'(DEPTH)) begin
            m_n = 0;
            m_flush = 1'b1;
            flush_start = cyc;
          end
        end else begin
          m_missed++;
          missed_since_flush = 1'b1;
        end
      end
      if (tx_valid && !tx_ready) n_stalls++;
      if (tx_valid && tx_ready) begin
        check(exp_q.size() > 0, "word with nothing expected");
        if (exp_q.size() > 0) begin
          logic [W-1:0] e;
          e = exp_q.pop_front();
          check(tx_data == e, $sformatf("word %0d is %h, expected %h", m_words, tx_data, e));
        end
        check(tx_last == (m_words == int'(DEPTH * NCH) - 1), "tx_last misplaced");
        if (++m_words == int'(DEPTH * NCH)) begin
          m_words = 0;
          m_flush = 1'b0;
          n_flushes++;
          flush_len.push_back(cyc - flush_start);
        end
      end
    end
  end

  // ---- scalers, strobe and receiver, driven on the falling edge
  int tcount = 0;
  always @(negedge clk) begin
    for (int c = 0; c < int'(NCH); c++) cnt[c] <= cnt[c] + W'($urandom_range(c));
    tcount <= (tcount + 1 >= tick_period) ? 0 : tcount + 1;
    tick     <= rst_n && (tcount + 1 >= tick_period);
    tx_ready <= ($urandom_range(99) < 32'(ready_pct));
  end

  initial begin
    for (int c = 0; c < int'(NCH); c++) cnt[c] = W'(16'hFF00 + c);
    m_last = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // Phase 1: receiver always ready.
    wait (n_flushes == 3);
    foreach (flush_len[i])
      check(flush_len[i] == int'(FLUSH_CYCLES),
            $sformatf("flush %0d took %0d cycles, expected %0d", i, flush_len[i], FLUSH_CYCLES));
    // Phase 2: receiver stalls, strobes come faster.
    ready_pct   = 40;
    tick_period = 7;
    wait (n_flushes == 20);
    repeat (2) @(posedge clk);
    check(int'(missed) == m_missed, $sformatf("missed_ticks_o %0d, model %0d", missed, m_missed));
    check(n_samples == 20 * int'(DEPTH) + m_n, "sample count");
    check(m_missed > 0,  "no strobe was missed");
    check(n_late > 0,    "no sample after a flush carried its counts");
    check(n_stalls > 0,  "receiver never stalled");
    check(n_wraps > 0,   "no difference across a counter wrap");
    $display("samples=%0d flushes=%0d missed=%0d late_samples=%0d stalls=%0d wraps=%0d",
             n_samples, n_flushes, m_missed, n_late, n_stalls, n_wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
