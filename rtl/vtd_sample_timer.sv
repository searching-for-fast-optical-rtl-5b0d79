// vtd_sample_timer: sampling strobe generator.
//
// A counter runs from 0 to PERIOD_CYCLES-1 and starts again; tick_o is high
// for the one cycle in which it holds PERIOD_CYCLES-1.  The first strobe after
// reset comes PERIOD_CYCLES cycles after rst_ni rises, and then one every
// PERIOD_CYCLES cycles, without end.  The timer never pauses: a strobe that
// falls while the buffer is being sent is simply not taken by the sampler.
//
// The 5.5 us period is the paper's; 550 cycles assumes a 100 MHz clock.
module vtd_sample_timer #(
  parameter int unsigned PERIOD_CYCLES = vtd_pkg::SAMPLE_PERIOD_CYCLES
) (
  input  logic clk_i,
  input  logic rst_ni,
  output logic tick_o
);

  localparam int unsigned CW = (PERIOD_CYCLES > 1) ? $clog2(PERIOD_CYCLES) : 1;

  logic [CW-1:0] cnt_q;
  logic          last;

  assign last = (cnt_q == CW'(PERIOD_CYCLES - 1));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)   cnt_q <= '0;
    else if (last) cnt_q <= '0;
    else           cnt_q <= cnt_q + CW'(1);
  end

  assign tick_o = last;

endmodule
