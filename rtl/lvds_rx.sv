// lvds_rx: de-serialiser for the 16 serial LVDS data lanes of the ADC.
//
// Each ADC channel sends its sample MSB first, one bit per bit period, and
// the ADC's frame clock (fco) is high while the first bit of a word is on
// the lanes. The receiver shifts every lane into a SAMPLE_W-bit register on
// each cycle with bit_en high, restarts its bit counter on the rising edge of
// fco, and after the SAMPLE_W-th bit presents all channels' words together
// with a one-cycle out_valid. 'locked' rises once a frame edge has been seen.
//
// Timing: out_valid is asserted on the cycle after the last bit of a word was
// sampled. Words that start before the first fco edge are discarded.
// The paper names this block only ("LVDS Interface", 16 lanes). The
// single-data-rate bit stream with a bit-enable, and the word framing by the
// fco edge, are this design's choices; the real part's DDR bit clock and its
// clock-domain crossing are not modelled.
module lvds_rx
  import daq_pkg::*;
#(
  parameter int unsigned NUM_CH   = daq_pkg::NUM_CH,
  parameter int unsigned SAMPLE_W = daq_pkg::SAMPLE_W
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 bit_en,   // one serial bit on din
  input  logic                                 fco,      // frame clock, high on the MSB
  input  logic [NUM_CH-1:0]                    din,
  output logic                                 out_valid,
  output logic [NUM_CH-1:0][SAMPLE_W-1:0]      out_data,
  output logic                                 locked
);
  localparam int unsigned CW = $clog2(SAMPLE_W + 1);

  logic [NUM_CH-1:0][SAMPLE_W-1:0] sr;
  logic [CW-1:0]                   bitcnt;   // bits of the current word received
  logic                            fco_q;
  logic                            frame_start;

  assign frame_start = fco && !fco_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr        <= '0;
      bitcnt    <= '0;
      fco_q     <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
      locked    <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (bit_en) begin
        fco_q <= fco;
        for (int c = 0; c < NUM_CH; c++) sr[c] <= {sr[c][SAMPLE_W-2:0], din[c]};
        if (frame_start) begin
          bitcnt <= CW'(1);
          locked <= 1'b1;
        end else if (bitcnt == CW'(SAMPLE_W - 1)) begin
          bitcnt    <= '0;
          out_valid <= 1'b1;
          for (int c = 0; c < NUM_CH; c++) out_data[c] <= {sr[c][SAMPLE_W-2:0], din[c]};
        end else if (bitcnt != '0) begin
          bitcnt <= bitcnt + 1'b1;
        end
      end
    end
  end
endmodule
