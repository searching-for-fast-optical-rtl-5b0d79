// vtd_pkg: constants and types shared by the transient-detector rate meter.
//
// The rate meter counts discriminator pulses from the seven centre pixels of a
// Cherenkov-telescope camera with 16-bit scalers, samples every scaler each
// 5.5 us, collects 70 samples in a buffer and then sends the full buffer to a
// host.  The channel count, scaler width, sample period and buffer depth are
// the published instrument's numbers.  The 100 MHz system clock, and hence the
// 550-cycle sample period, is this design's own choice.
package vtd_pkg;

  // Centre pixel plus the six pixels of its guard ring.  Channel 0 is the
  // centre pixel, channels 1 to 6 the guard (veto) ring.
  localparam int unsigned NUM_CHANNELS  = 7;
  localparam int unsigned SCALER_WIDTH  = 16;

  // Samples held by the buffer before it is sent out.
  localparam int unsigned SAMPLE_DEPTH  = 70;

  // System clock and sample period.
  localparam longint unsigned CLK_FREQ_HZ    = 100_000_000;
  localparam int unsigned     SAMPLE_PERIOD_NS = 5_500;
  localparam int unsigned     SAMPLE_PERIOD_CYCLES =
      int'((longint'(SAMPLE_PERIOD_NS) * CLK_FREQ_HZ) / 64'd1_000_000_000);

  localparam int unsigned MISSED_WIDTH  = 32;

  // Sampler states: sampling, or one of three steps of a buffer flush.
  typedef enum logic [1:0] {
    S_SAMPLE = 2'd0,  // waiting for strobes, storing samples
    S_READ   = 2'd1,  // flush: read request for the next buffer row
    S_LOAD   = 2'd2,  // flush: row arrives from the buffer
    S_SEND   = 2'd3   // flush: one word per channel out on the stream
  } sampler_state_e;

endpackage
