// adc_data_mux: selects which ADC interface feeds the SEU checker. The paper's
// firmware receives either the LVDS or the JESD204B output of the ADC and
// multiplexes them onto one "ADC Data" path; src_sel is a host register bit
// (0 = LVDS, 1 = JESD). The output is registered: out_valid/out_data follow
// the selected input one cycle later. The register stage is this design's
// choice.
module adc_data_mux
  import daq_pkg::*;
#(
  parameter int unsigned NUM_CH   = daq_pkg::NUM_CH,
  parameter int unsigned SAMPLE_W = daq_pkg::SAMPLE_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            src_sel,
  input  logic                            lvds_valid,
  input  logic [NUM_CH-1:0][SAMPLE_W-1:0] lvds_data,
  input  logic                            jesd_valid,
  input  logic [NUM_CH-1:0][SAMPLE_W-1:0] jesd_data,
  output logic                            out_valid,
  output logic [NUM_CH-1:0][SAMPLE_W-1:0] out_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (src_sel) begin
      out_valid <= jesd_valid;
      if (jesd_valid) out_data <= jesd_data;
    end else begin
      out_valid <= lvds_valid;
      if (lvds_valid) out_data <= lvds_data;
    end
  end
endmodule
