// jesd_rx_lane: JESD204B link-layer receiver for one lane carrying one
// converter (one ADC channel).
//
// Input is the decoded octet stream of the lane's transceiver (8b/10b already
// removed) with a K-character flag. The lane:
//   CGS  - holds sync_n low until 4 consecutive /K/ (K28.5) are seen;
//   ILAS - after the first non-/K/ character, skips the initial lane
//          alignment sequence of 4 multiframes (4*K_MF*2 octets);
//   DATA - assembles two octets per frame into one sample (14-bit sample in
//          the upper bits, 2 tail bits) and undoes character replacement:
//          a /F/ (K28.7) or /A/ (K28.3) in the last octet of a frame stands
//          for the last octet of the previous frame.
// Any other K character during DATA is a link error: the lane goes back to
// CGS and counts the error.
// Timing: out_valid pulses the cycle after the second octet of a frame.
// The paper names the JESD interface only; the link parameters (one converter
// per lane, F=2, no scrambling, K_MF frames per multiframe) are assumptions.
module jesd_rx_lane
  import daq_pkg::*;
#(
  parameter int unsigned SAMPLE_W = daq_pkg::SAMPLE_W,
  parameter int unsigned K_MF     = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [7:0]          in_octet,
  input  logic                in_is_k,
  output logic                sync_n,
  output logic                in_data_phase,
  output logic                out_valid,
  output logic [SAMPLE_W-1:0] out_sample,
  output logic [7:0]          err_count
);
  localparam int unsigned ILAS_OCTETS = 4 * K_MF * 2;
  localparam int unsigned IW = $clog2(ILAS_OCTETS + 1);

  typedef enum logic [1:0] {S_CGS, S_WAIT_ILAS, S_ILAS, S_DATA} lane_state_e;
  lane_state_e st;

  logic [2:0]  k_run;
  logic [IW-1:0] ilas_cnt;
  logic        pos;          // octet position in the frame (F = 2)
  logic [7:0]  first_octet;
  logic [7:0]  prev_last;    // last octet of the previous frame
  logic [7:0]  octet_fixed;
  logic        is_repl;

  assign is_repl     = in_is_k && pos && (in_octet == K28_7 || in_octet == K28_3);
  assign octet_fixed = is_repl ? prev_last : in_octet;
  assign sync_n        = (st != S_CGS);
  assign in_data_phase = (st == S_DATA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_CGS;
      k_run       <= '0;
      ilas_cnt    <= '0;
      pos         <= 1'b0;
      first_octet <= '0;
      prev_last   <= '0;
      out_valid   <= 1'b0;
      out_sample  <= '0;
      err_count   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        unique case (st)
          S_CGS: begin
            if (in_is_k && in_octet == K28_5) begin
              if (k_run == 3'd3) st <= S_WAIT_ILAS;
              k_run <= (k_run == 3'd3) ? 3'd0 : k_run + 1'b1;
            end else begin
              k_run <= '0;
            end
          end
          S_WAIT_ILAS: begin
            if (!(in_is_k && in_octet == K28_5)) begin
              st       <= S_ILAS;
              ilas_cnt <= IW'(1);
            end
          end
          S_ILAS: begin
            if (ilas_cnt == IW'(ILAS_OCTETS - 1)) begin
              st  <= S_DATA;
              pos <= 1'b0;
            end
            ilas_cnt <= ilas_cnt + 1'b1;
          end
          S_DATA: begin
            if (in_is_k && !is_repl) begin
              st        <= S_CGS;
              k_run     <= '0;
              err_count <= (err_count == 8'hFF) ? err_count : err_count + 1'b1;
            end else if (!pos) begin
              first_octet <= in_octet;
              pos         <= 1'b1;
            end else begin
              pos        <= 1'b0;
              prev_last  <= octet_fixed;
              out_valid  <= 1'b1;
              out_sample <= SAMPLE_W'({first_octet, octet_fixed} >> (16 - SAMPLE_W));
            end
          end
          default: st <= S_CGS;
        endcase
      end
    end
  end

  initial assert (SAMPLE_W <= 16) else $error("two octets per frame hold at most 16 bits");
endmodule
