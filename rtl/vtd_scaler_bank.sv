// vtd_scaler_bank: the seven pixel scalers.
//
// One vtd_scaler per channel.  Each counts the rising edges of its own
// discriminator pulse input and presents the running 16-bit count, wrapped
// modulo 2^16, in the clk_i domain.  Channel 0 is the centre pixel and
// channels 1 to 6 its guard ring.  Counts appear on count_o two to three
// clk_i cycles after the pulse (the synchroniser depth).
//
// Seven free-running 16-bit scalers are the paper's; the clock-domain
// crossing is this design's choice (see vtd_scaler).
module vtd_scaler_bank #(
  parameter int unsigned NUM_CHANNELS = vtd_pkg::NUM_CHANNELS,
  parameter int unsigned SCALER_WIDTH = vtd_pkg::SCALER_WIDTH,
  parameter int unsigned SYNC_STAGES  = 2
) (
  input  logic                                       clk_i,
  input  logic                                       rst_ni,
  input  logic [NUM_CHANNELS-1:0]                    pulse_i,
  output logic [NUM_CHANNELS-1:0][SCALER_WIDTH-1:0]  count_o
);

  for (genvar c = 0; c < NUM_CHANNELS; c++) begin : g_ch
    vtd_scaler #(
      .WIDTH      (SCALER_WIDTH),
      .SYNC_STAGES(SYNC_STAGES)
    ) u_scaler (
      .clk_i  (clk_i),
      .rst_ni (rst_ni),
      .pulse_i(pulse_i[c]),
      .count_o(count_o[c])
    );
  end

endmodule
