// jesd_rx: the JESD204B interface of the DAQ board, NUM_LANES instances of
// jesd_rx_lane, one per ADC channel.
//
// The link is up when every lane has left ILAS and is in the data phase.
// A sample set is released (out_valid) only on cycles where all lanes deliver
// a sample together; a cycle where some lanes deliver and others do not is a
// lane-alignment error and is counted in align_err. The combined sync_n to
// the ADC is low while any lane is still in code-group synchronisation.
// Timing: out_valid follows the lane outputs with no extra register.
// This design does not model elastic buffers released on the local
// multiframe clock: lanes are expected to arrive aligned (same cable length,
// same transceiver clock).
module jesd_rx
  import daq_pkg::*;
#(
  parameter int unsigned NUM_LANES = daq_pkg::NUM_CH,
  parameter int unsigned SAMPLE_W  = daq_pkg::SAMPLE_W,
  parameter int unsigned K_MF      = 32
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  in_valid,
  input  logic [NUM_LANES-1:0][7:0]             in_octet,
  input  logic [NUM_LANES-1:0]                  in_is_k,
  output logic                                  sync_n,
  output logic                                  link_up,
  output logic                                  out_valid,
  output logic [NUM_LANES-1:0][SAMPLE_W-1:0]    out_data,
  output logic [15:0]                           align_err,
  output logic [15:0]                           link_err
);
  logic [NUM_LANES-1:0] lane_sync_n, lane_data, lane_valid;
  logic [NUM_LANES-1:0][7:0] lane_err;

  for (genvar l = 0; l < NUM_LANES; l++) begin : g_lane
    jesd_rx_lane #(.SAMPLE_W(SAMPLE_W), .K_MF(K_MF)) u_lane (
      .clk, .rst_n,
      .in_valid      (in_valid),
      .in_octet      (in_octet[l]),
      .in_is_k       (in_is_k[l]),
      .sync_n        (lane_sync_n[l]),
      .in_data_phase (lane_data[l]),
      .out_valid     (lane_valid[l]),
      .out_sample    (out_data[l]),
      .err_count     (lane_err[l])
    );
  end

  assign sync_n    = &lane_sync_n;
  assign link_up   = &lane_data;
  assign out_valid = &lane_valid;

  always_comb begin
    link_err = '0;
    for (int l = 0; l < NUM_LANES; l++) link_err = link_err + 16'(lane_err[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) align_err <= '0;
    else if (|lane_valid && !(&lane_valid) && align_err != 16'hFFFF) align_err <= align_err + 1'b1;
  end
endmodule
