// daq_regs: control and status registers of the SEE test path (data source,
// threshold, LUT phase, start/stop, SYNC enable, and the event and capture
// results). Register map on the local register bus:
//   0x000 CTRL      W: [0] arm (start a test: clear the last event, restart
//                      the LUT counter, start recording) [1] source select
//                      (0 LVDS, 1 JESD) [2] SYNC clock enable [3] stop
//                      [4] snapshot (freeze a capture window without an
//                      SEE event)
//                   R: [0] checking enabled [1] source [2] SYNC enable
//   0x004 THRESHOLD [13:0] SEE threshold in ADC counts
//   0x008 PHASE     LUT read offset (phase adjustment)
//   0x00C STATUS    [0] SEE flag [1] capture done [2] recording [3] JESD link
//                   up [4] LVDS frame lock [5] capture AXI error
//   0x010 CH_MASK   channels over threshold at the flagged point
//   0x014 EVENTS    SEE events since reset
//   0x018 TRIG_ADDR byte address of the first point of the capture window
//   0x01C FLAG_SMP  index of the flagged point, counted from arm
//   0x020 OVERFLOW  points lost to back-pressure in the current capture
//   0x024 JESD_ERR  [31:16] lane-alignment errors [15:0] link errors
// arm and snapshot are one-cycle pulses on the cycle after the write. Reads are answered
// on the cycle after the rd strobe. The map is this design's own.
module daq_regs
  import daq_pkg::*;
#(
  parameter int unsigned NUM_CH   = daq_pkg::NUM_CH,
  parameter int unsigned SAMPLE_W = daq_pkg::SAMPLE_W,
  parameter int unsigned PHASE_W  = $clog2(daq_pkg::LUT_DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  reg_req_t            req,
  output logic [31:0]         rdata,
  output logic                arm,
  output logic                snapshot,
  output logic                enable,
  output logic                src_sel,
  output logic                sync_en,
  output logic [SAMPLE_W-1:0] threshold,
  output logic [PHASE_W-1:0]  phase,
  input  logic                see_flag,
  input  logic                cap_done,
  input  logic                cap_running,
  input  logic                jesd_link_up,
  input  logic                lvds_locked,
  input  logic                cap_err,
  input  logic [NUM_CH-1:0]   ch_mask,
  input  logic [31:0]         event_count,
  input  logic [31:0]         trig_addr,
  input  logic [31:0]         flag_sample,
  input  logic [15:0]         overflow,
  input  logic [15:0]         jesd_align_err,
  input  logic [15:0]         jesd_link_err
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arm       <= 1'b0;
      snapshot  <= 1'b0;
      enable    <= 1'b0;
      src_sel   <= 1'b0;
      sync_en   <= 1'b0;
      threshold <= '1;
      phase     <= '0;
      rdata     <= '0;
    end else begin
      arm      <= 1'b0;
      snapshot <= 1'b0;
      if (req.wr) begin
        unique case (req.addr)
          R_CTRL: begin
            src_sel <= req.wdata[1];
            sync_en <= req.wdata[2];
            snapshot <= req.wdata[4];
            if (req.wdata[0]) begin
              arm    <= 1'b1;
              enable <= 1'b1;
            end else if (req.wdata[3]) begin
              enable <= 1'b0;
            end
          end
          R_THRESHOLD: threshold <= req.wdata[SAMPLE_W-1:0];
          R_PHASE:     phase     <= req.wdata[PHASE_W-1:0];
          default: ;
        endcase
      end
      if (req.rd) begin
        unique case (req.addr)
          R_CTRL:      rdata <= {29'd0, sync_en, src_sel, enable};
          R_THRESHOLD: rdata <= 32'(threshold);
          R_PHASE:     rdata <= 32'(phase);
          R_STATUS:    rdata <= {26'd0, cap_err, lvds_locked, jesd_link_up, cap_running, cap_done, see_flag};
          R_CH_MASK:   rdata <= 32'(ch_mask);
          R_EVENTS:    rdata <= event_count;
          R_TRIG_ADDR: rdata <= trig_addr;
          R_FLAG_SMP:  rdata <= flag_sample;
          R_OVERFLOW:  rdata <= 32'(overflow);
          R_JESD_ERR:  rdata <= {jesd_align_err, jesd_link_err};
          default:     rdata <= '0;
        endcase
      end
    end
  end
endmodule
