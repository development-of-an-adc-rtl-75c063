// seu_checker: the on-line SEE detector. For every sample point it compares
// each channel's ADC sample with the LUT's expected sample and flags an SEE
// event when |ADC - LUT| exceeds the programmable threshold on any channel.
//
// The ADC data arrives one cycle ahead of the matching LUT data (block RAM
// latency); it is held until the LUT word comes and the pair is compared.
// After 'arm' (a pulse that clears the previous event) the first sample point
// over threshold raises see_flag, which stays high until the next arm, and
// gives a one-cycle trig pulse aligned with that point on the output stream.
// ch_mask records which channels were over threshold at that point,
// flag_sample its index counted from arm, and event_count the number of
// events since reset. Every compared pair is passed on (out_valid, out_adc,
// out_lut) for the capture buffer.
// Timing: out_valid/trig come one cycle after lut_valid. The comparison and
// its threshold follow the paper; one shared threshold, strict '>', the sticky
// flag and the counters are this design's choices.
module seu_checker
  import daq_pkg::*;
#(
  parameter int unsigned NUM_CH   = daq_pkg::NUM_CH,
  parameter int unsigned SAMPLE_W = daq_pkg::SAMPLE_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            arm,
  input  logic                            enable,
  input  logic [SAMPLE_W-1:0]             threshold,
  input  logic                            adc_valid,
  input  logic [NUM_CH-1:0][SAMPLE_W-1:0] adc_data,
  input  logic                            lut_valid,
  input  logic [NUM_CH-1:0][SAMPLE_W-1:0] lut_data,
  output logic                            out_valid,
  output logic [NUM_CH-1:0][SAMPLE_W-1:0] out_adc,
  output logic [NUM_CH-1:0][SAMPLE_W-1:0] out_lut,
  output logic                            trig,
  output logic                            see_flag,
  output logic [NUM_CH-1:0]               ch_mask,
  output logic [31:0]                     flag_sample,
  output logic [31:0]                     event_count
);
  logic [NUM_CH-1:0][SAMPLE_W-1:0] adc_q;
  logic [NUM_CH-1:0]               over;
  logic [31:0]                     smp_cnt;

  always_comb begin
    for (int c = 0; c < NUM_CH; c++) begin
      logic [SAMPLE_W-1:0] diff;
      diff    = (adc_q[c] >= lut_data[c]) ? adc_q[c] - lut_data[c] : lut_data[c] - adc_q[c];
      over[c] = diff > threshold;
    end
  end

  always_ff @(posedge clk) begin
    if (adc_valid) adc_q <= adc_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_adc     <= '0;
      out_lut     <= '0;
      trig        <= 1'b0;
      see_flag    <= 1'b0;
      ch_mask     <= '0;
      flag_sample <= '0;
      event_count <= '0;
      smp_cnt     <= '0;
    end else begin
      out_valid <= lut_valid && enable;
      trig      <= 1'b0;
      if (arm) begin
        see_flag    <= 1'b0;
        ch_mask     <= '0;
        flag_sample <= '0;
        smp_cnt     <= '0;
      end else if (lut_valid && enable) begin
        out_adc <= adc_q;
        out_lut <= lut_data;
        smp_cnt <= smp_cnt + 1'b1;
        if (|over && !see_flag) begin
          trig        <= 1'b1;
          see_flag    <= 1'b1;
          ch_mask     <= over;
          flag_sample <= smp_cnt;
          event_count <= event_count + 1'b1;
        end
      end
    end
  end

  // The trigger is issued at most once per arm.
  assert property (@(posedge clk) disable iff (!rst_n) trig |-> !$past(see_flag) || $past(arm));
endmodule
