// vtd_sample_buffer: the sample memory.
//
// DEPTH rows, one per sample; a row holds the NUM_CHANNELS values, each
// SCALER_WIDTH bits wide, taken at one strobe (70 x 7 x 16 = 7840 bits at the
// defaults).  One write port stores a whole row in a cycle; one read port
// returns the row at raddr_i on rdata_o in the cycle after re_i.  The rows are
// not reset: each is written before it is read.
//
// The 70-sample depth is the paper's; the row layout and the one-cycle read
// are this design's choice.
module vtd_sample_buffer #(
  parameter int unsigned NUM_CHANNELS = vtd_pkg::NUM_CHANNELS,
  parameter int unsigned SCALER_WIDTH = vtd_pkg::SCALER_WIDTH,
  parameter int unsigned DEPTH        = vtd_pkg::SAMPLE_DEPTH,
  localparam int unsigned AW          = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                                      clk_i,
  input  logic                                      we_i,
  input  logic [AW-1:0]                             waddr_i,
  input  logic [NUM_CHANNELS-1:0][SCALER_WIDTH-1:0] wdata_i,
  input  logic                                      re_i,
  input  logic [AW-1:0]                             raddr_i,
  output logic [NUM_CHANNELS-1:0][SCALER_WIDTH-1:0] rdata_o
);

  logic [NUM_CHANNELS*SCALER_WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (we_i) mem[waddr_i] <= wdata_i;
  end

  always_ff @(posedge clk_i) begin
    if (re_i) rdata_o <= mem[raddr_i];
  end

endmodule
