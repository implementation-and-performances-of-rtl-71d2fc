// trigger_generator: local trigger and timestamp for the three PMT channels.
//
// Each clock of the 125 MHz system clock brings one line of eight 14-bit FADC
// samples per channel (1 GS/s). The module keeps the 48-bit timestamp counter,
// in units of 8 ns, that tags every line, and raises a local trigger request
// for a channel when its signal crosses the channel's programmable threshold
// from below. The request carries the timestamp of the line holding the
// crossing; the readout window starts at that line.
//
// The local trigger itself (threshold crossing, timestamp of the crossing) and
// the 8 ns timestamp unit follow the paper. Its insides are this design's own:
// a rising crossing means sample >= threshold with the previous sample below
// it; after a trigger the channel is held off for HOLDOFF lines (one readout
// window by default) so that one pulse gives one request; the counter can be
// loaded from the synchronous link (ts_load) to align GCUs.
//
// Interface: adc[ch][k] is sample k of the line (k = 0 earliest). trig_valid
// pulses one clock with trig.chmask holding the channels that fired and
// trig.ts the timestamp of their line. Timing: trig_valid comes one clock
// after the line is presented; ts_now is the timestamp of the line presented
// in the same clock.
module trigger_generator
  import gcu_pkg::*;
#(
  parameter int unsigned HOLDOFF = WAVE_SAMPLES / SAMPLES_PER_CLK  // 125 lines
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [NCH-1:0][SAMPLES_PER_CLK-1:0][ADC_BITS-1:0] adc,
  input  logic [NCH-1:0][ADC_BITS-1:0] threshold,
  input  logic [NCH-1:0]             ch_enable,
  input  logic                       ts_load,
  input  logic [TS_BITS-1:0]         ts_load_value,
  output logic [TS_BITS-1:0]         ts_now,
  output logic                       trig_valid,
  output trig_t                      trig
);

  logic [NCH-1:0][ADC_BITS-1:0] last_sample;
  logic [NCH-1:0]               crossing;
  logic [NCH-1:0][$clog2(HOLDOFF+1)-1:0] holdoff_cnt;

  // Rising crossing anywhere in the line, including across the line boundary.
  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      logic prev_below;
      crossing[c]   = 1'b0;
      prev_below = last_sample[c] < threshold[c];
      for (int k = 0; k < SAMPLES_PER_CLK; k++) begin
        if (prev_below && adc[c][k] >= threshold[c]) crossing[c] = 1'b1;
        prev_below = adc[c][k] < threshold[c];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ts_now      <= '0;
      last_sample <= '0;
      holdoff_cnt <= '0;
      trig_valid  <= 1'b0;
      trig        <= '0;
    end else begin
      ts_now <= ts_load ? ts_load_value : ts_now + 1'b1;
      trig_valid <= 1'b0;
      trig.ts    <= ts_now;
      for (int c = 0; c < NCH; c++) begin
        last_sample[c] <= adc[c][SAMPLES_PER_CLK-1];
        trig.chmask[c] <= 1'b0;
        if (holdoff_cnt[c] != 0) begin
          holdoff_cnt[c] <= holdoff_cnt[c] - 1'b1;
        end else if (crossing[c] && ch_enable[c]) begin
          trig.chmask[c] <= 1'b1;
          trig_valid     <= 1'b1;
          holdoff_cnt[c] <= ($clog2(HOLDOFF+1))'(HOLDOFF - 1);
        end
      end
    end
  end

endmodule
