// vtd_scaler: one 16-bit pulse scaler with a Gray-code crossing into the
// system clock domain.
//
// The counter is clocked by the discriminator pulse itself, so each rising
// edge of pulse_i adds one and the highest countable rate is set by the
// counter's own speed, not by the system clock (the published instrument
// quotes 400 MHz for its scalers).  The counter runs freely and wraps modulo
// 2^WIDTH; it is cleared only by reset.  Next to the binary count it keeps the
// same value in Gray code, which changes in one bit per pulse, so the
// SYNC_STAGES-deep synchroniser in the clk_i domain always captures either the
// old or the new value, never a mix.  count_o is the synchronised Gray value
// turned back into binary; it trails the pulses by SYNC_STAGES to
// SYNC_STAGES+1 clk_i cycles.
//
// The free-running 16-bit scaler follows the paper; the pulse-clocked counter
// and the Gray-code crossing are this design's choice.
module vtd_scaler #(
  parameter int unsigned WIDTH       = 16,
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic             clk_i,
  input  logic             rst_ni,   // asynchronous, active low
  input  logic             pulse_i,  // one count per rising edge
  output logic [WIDTH-1:0] count_o
);

  logic [WIDTH-1:0] bin_q, bin_next, gray_q;

  assign bin_next = bin_q + WIDTH'(1);

  // Pulse domain: binary counter and its Gray-coded copy.
  always_ff @(posedge pulse_i or negedge rst_ni) begin
    if (!rst_ni) begin
      bin_q  <= '0;
      gray_q <= '0;
    end else begin
      bin_q  <= bin_next;
      gray_q <= bin_next ^ (bin_next >> 1);
    end
  end

  // System domain: synchroniser chain.
  logic [WIDTH-1:0] sync_q [SYNC_STAGES];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int s = 0; s < SYNC_STAGES; s++) sync_q[s] <= '0;
    end else begin
      sync_q[0] <= gray_q;
      for (int s = 1; s < SYNC_STAGES; s++) sync_q[s] <= sync_q[s-1];
    end
  end

  // Gray to binary: bit i is the XOR of all Gray bits from i upwards.
  always_comb begin
    for (int i = 0; i < WIDTH; i++) count_o[i] = ^(sync_q[SYNC_STAGES-1] >> i);
  end

endmodule
