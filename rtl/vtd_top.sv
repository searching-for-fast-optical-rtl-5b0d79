// vtd_top: the rate meter of a fast optical transient detector.
//
// Seven discriminator pulse trains (the centre pixel of a Cherenkov camera on
// channel 0, its six guard-ring pixels on channels 1 to 6) are counted by
// free-running 16-bit scalers.  Every PERIOD_CYCLES clock cycles (5.5 us at
// 100 MHz) the sampler stores, per channel, the number of pulses since the
// previous sample as one row of a DEPTH-row buffer.  When the buffer holds 70
// samples the sampler stops sampling and sends it out on the tx_* word stream
// (DEPTH*NUM_CHANNELS 16-bit words, sample by sample, channel 0 first,
// tx_last_o on the final word) to an Ethernet interface outside this module.
// Pulses arriving during the send are carried into the first sample after it.
//
//   pulse_i -> vtd_scaler_bank -> vtd_sampler <-> vtd_sample_buffer
//                                   ^   |
//                  vtd_sample_timer-+   +-> tx_* (to Ethernet), flushing_o
//
// The block structure, sizes and rates follow the paper; the 100 MHz clock,
// the difference coding and the stream interface are this design's choices.
module vtd_top #(
  parameter int unsigned NUM_CHANNELS  = vtd_pkg::NUM_CHANNELS,
  parameter int unsigned SCALER_WIDTH  = vtd_pkg::SCALER_WIDTH,
  parameter int unsigned DEPTH         = vtd_pkg::SAMPLE_DEPTH,
  parameter int unsigned PERIOD_CYCLES = vtd_pkg::SAMPLE_PERIOD_CYCLES
) (
  input  logic                              clk_i,
  input  logic                              rst_ni,
  input  logic [NUM_CHANNELS-1:0]           pulse_i,

  output logic [SCALER_WIDTH-1:0]           tx_data_o,
  output logic                              tx_valid_o,
  output logic                              tx_last_o,
  input  logic                              tx_ready_i,

  output logic                              flushing_o,
  output logic [vtd_pkg::MISSED_WIDTH-1:0]  missed_ticks_o
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [NUM_CHANNELS-1:0][SCALER_WIDTH-1:0] count;
  logic                                      tick;
  logic                                      buf_we, buf_re;
  logic [AW-1:0]                             buf_waddr, buf_raddr;
  logic [NUM_CHANNELS-1:0][SCALER_WIDTH-1:0] buf_wdata, buf_rdata;

  vtd_scaler_bank #(
    .NUM_CHANNELS(NUM_CHANNELS),
    .SCALER_WIDTH(SCALER_WIDTH)
  ) u_scalers (
    .clk_i  (clk_i),
    .rst_ni (rst_ni),
    .pulse_i(pulse_i),
    .count_o(count)
  );

  vtd_sample_timer #(
    .PERIOD_CYCLES(PERIOD_CYCLES)
  ) u_timer (
    .clk_i (clk_i),
    .rst_ni(rst_ni),
    .tick_o(tick)
  );

  vtd_sampler #(
    .NUM_CHANNELS(NUM_CHANNELS),
    .SCALER_WIDTH(SCALER_WIDTH),
    .DEPTH       (DEPTH)
  ) u_sampler (
    .clk_i         (clk_i),
    .rst_ni        (rst_ni),
    .tick_i        (tick),
    .count_i       (count),
    .buf_we_o      (buf_we),
    .buf_waddr_o   (buf_waddr),
    .buf_wdata_o   (buf_wdata),
    .buf_re_o      (buf_re),
    .buf_raddr_o   (buf_raddr),
    .buf_rdata_i   (buf_rdata),
    .tx_data_o     (tx_data_o),
    .tx_valid_o    (tx_valid_o),
    .tx_last_o     (tx_last_o),
    .tx_ready_i    (tx_ready_i),
    .flushing_o    (flushing_o),
    .missed_ticks_o(missed_ticks_o)
  );

  vtd_sample_buffer #(
    .NUM_CHANNELS(NUM_CHANNELS),
    .SCALER_WIDTH(SCALER_WIDTH),
    .DEPTH       (DEPTH)
  ) u_buffer (
    .clk_i  (clk_i),
    .we_i   (buf_we),
    .waddr_i(buf_waddr),
    .wdata_i(buf_wdata),
    .re_i   (buf_re),
    .raddr_i(buf_raddr),
    .rdata_o(buf_rdata)
  );

endmodule
