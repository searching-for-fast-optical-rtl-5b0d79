// vtd_sampler: takes the samples, fills the buffer and sends it out.
//
// This is the job the published instrument gives to software on an embedded
// processor, done here by a small state machine.
//
// Sampling (state S_SAMPLE).  At each tick_i the sampler reads all scaler
// counts, subtracts the counts it read at the previous sample (modulo 2^16)
// and writes the differences as one row of the buffer; it then keeps the new
// counts for the next subtraction.  The scalers run freely, so a difference
// is the number of pulses since the previous sample taken, however long ago.
//
// Flushing (S_READ, S_LOAD, S_SEND).  The strobe that writes row DEPTH-1 starts
// a flush: for each row in turn the sampler reads it from the buffer (S_READ),
// latches it (S_LOAD) and offers its NUM_CHANNELS values as words on the
// tx_* stream, channel 0 first (S_SEND).  A word moves when tx_valid_o and
// tx_ready_i are both high; tx_last_o marks the last word of the buffer.
// While flushing, strobes are not taken and are counted in missed_ticks_o.
// The scalers keep counting, so the first sample after a flush holds every
// pulse that arrived during it: counts are late, never lost.
//
// Timing: a sample is written in the cycle of its strobe.  A flush needs
// DEPTH*(NUM_CHANNELS+2) cycles when tx_ready_i stays high; with a slow
// receiver it lasts as long as the receiver takes.  flushing_o is high from
// the cycle after the last strobe of a buffer until the cycle after its last
// word moved.
//
// Following the paper: the 5.5 us sampling, the 70-sample buffer, the stop of
// sampling during the send and the counts carried into the next sample.  This
// design's own choices: the differences stored instead of raw counts, the
// word order, the valid/ready stream and the missed-strobe counter.
module vtd_sampler #(
  parameter int unsigned NUM_CHANNELS = vtd_pkg::NUM_CHANNELS,
  parameter int unsigned SCALER_WIDTH = vtd_pkg::SCALER_WIDTH,
  parameter int unsigned DEPTH        = vtd_pkg::SAMPLE_DEPTH,
  localparam int unsigned AW          = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CHW         = (NUM_CHANNELS > 1) ? $clog2(NUM_CHANNELS) : 1
) (
  input  logic                                      clk_i,
  input  logic                                      rst_ni,
  input  logic                                      tick_i,
  input  logic [NUM_CHANNELS-1:0][SCALER_WIDTH-1:0] count_i,

  // Sample buffer
  output logic                                      buf_we_o,
  output logic [AW-1:0]                             buf_waddr_o,
  output logic [NUM_CHANNELS-1:0][SCALER_WIDTH-1:0] buf_wdata_o,
  output logic                                      buf_re_o,
  output logic [AW-1:0]                             buf_raddr_o,
  input  logic [NUM_CHANNELS-1:0][SCALER_WIDTH-1:0] buf_rdata_i,

  // Word stream towards the Ethernet interface
  output logic [SCALER_WIDTH-1:0]                   tx_data_o,
  output logic                                      tx_valid_o,
  output logic                                      tx_last_o,
  input  logic                                      tx_ready_i,

  // Status
  output logic                                      flushing_o,
  output logic [vtd_pkg::MISSED_WIDTH-1:0]                   missed_ticks_o
);

  vtd_pkg::sampler_state_e state_q;

  logic [NUM_CHANNELS-1:0][SCALER_WIDTH-1:0] last_q;   // counts at previous sample
  logic [NUM_CHANNELS-1:0][SCALER_WIDTH-1:0] row_q;    // row being sent
  logic [AW-1:0]                             wptr_q;   // next row to write
  logic [AW-1:0]                             rptr_q;   // row being sent
  logic [CHW-1:0]                            ch_q;     // channel being sent
  logic [vtd_pkg::MISSED_WIDTH-1:0]                   missed_q;

  logic take;      // a strobe that is taken
  logic row_done;  // last word of the current row moves
  logic buf_done;  // last word of the buffer moves

  assign take     = tick_i && (state_q == vtd_pkg::S_SAMPLE);
  assign row_done = (state_q == vtd_pkg::S_SEND) && tx_ready_i && (ch_q == CHW'(NUM_CHANNELS - 1));
  assign buf_done = row_done && (rptr_q == AW'(DEPTH - 1));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= vtd_pkg::S_SAMPLE;
      last_q   <= '0;
      row_q    <= '0;
      wptr_q   <= '0;
      rptr_q   <= '0;
      ch_q     <= '0;
      missed_q <= '0;
    end else begin
      if (tick_i && state_q != vtd_pkg::S_SAMPLE) missed_q <= missed_q + 1'b1;

      unique case (state_q)
        vtd_pkg::S_SAMPLE: begin
          if (take) begin
            last_q <= count_i;
            if (wptr_q == AW'(DEPTH - 1)) begin
              wptr_q  <= '0;
              rptr_q  <= '0;
              state_q <= vtd_pkg::S_READ;
            end else begin
              wptr_q  <= wptr_q + 1'b1;
            end
          end
        end
        vtd_pkg::S_READ: state_q <= vtd_pkg::S_LOAD;
        vtd_pkg::S_LOAD: begin
          row_q   <= buf_rdata_i;
          ch_q    <= '0;
          state_q <= vtd_pkg::S_SEND;
        end
        vtd_pkg::S_SEND: begin
          if (buf_done) begin
            state_q <= vtd_pkg::S_SAMPLE;
          end else if (row_done) begin
            rptr_q  <= rptr_q + 1'b1;
            state_q <= vtd_pkg::S_READ;
          end else if (tx_ready_i) begin
            ch_q    <= ch_q + 1'b1;
          end
        end
        default: state_q <= vtd_pkg::S_SAMPLE;
      endcase
    end
  end

  // Buffer write: the differences since the previous sample.
  always_comb begin
    for (int c = 0; c < NUM_CHANNELS; c++) buf_wdata_o[c] = count_i[c] - last_q[c];
  end
  assign buf_we_o    = take;
  assign buf_waddr_o = wptr_q;

  // Buffer read during a flush.
  assign buf_re_o    = (state_q == vtd_pkg::S_READ);
  assign buf_raddr_o = rptr_q;

  // Stream.
  assign tx_valid_o = (state_q == vtd_pkg::S_SEND);
  assign tx_data_o  = row_q[ch_q];
  assign tx_last_o  = (state_q == vtd_pkg::S_SEND) && (ch_q == CHW'(NUM_CHANNELS - 1)) &&
                      (rptr_q == AW'(DEPTH - 1));

  assign flushing_o     = (state_q != vtd_pkg::S_SAMPLE);
  assign missed_ticks_o = missed_q;

  // Stream rule: an offered word stays, unchanged, until it is taken.
  a_tx_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
      tx_valid_o && !tx_ready_i |=> tx_valid_o && $stable(tx_data_o) && $stable(tx_last_o));

endmodule
