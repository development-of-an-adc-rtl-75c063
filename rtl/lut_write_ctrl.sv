// lut_write_ctrl: loads the host-computed reference waveforms into the LUT.
//
// In the firmware block diagram this block sits between the AXI4 bus and
// the LUT. Register map (offsets on the local register bus):
//   0x000 PTR  [19:16] channel, [9:0] index of the next access (read/write)
//   0x004 DATA write: store [13:0] at PTR, then PTR advances;
//              read : return the entry at PTR, then PTR advances.
// The pointer advances through the indices of a channel and then on to the
// next channel, so a whole table (NUM_CH x DEPTH words) is loaded by one PTR
// write followed by a stream of DATA writes.
// Timing: a read is answered on the cycle after the rd strobe (the LUT's
// block RAM latency). The register layout is this design's choice; the
// paper only names the block.
module lut_write_ctrl
  import daq_pkg::*;
#(
  parameter int unsigned NUM_CH   = daq_pkg::NUM_CH,
  parameter int unsigned DEPTH    = daq_pkg::LUT_DEPTH,
  parameter int unsigned SAMPLE_W = daq_pkg::SAMPLE_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  reg_req_t                      req,
  output logic [31:0]                   rdata,
  // LUT host port
  output logic                          lut_we,
  output logic                          lut_re,
  output logic [$clog2(NUM_CH)-1:0]     lut_ch,
  output logic [$clog2(DEPTH)-1:0]      lut_idx,
  output logic [SAMPLE_W-1:0]           lut_wdata,
  input  logic [SAMPLE_W-1:0]           lut_rdata
);
  localparam int unsigned CHW = $clog2(NUM_CH);
  localparam int unsigned AW  = $clog2(DEPTH);

  logic [CHW-1:0] ptr_ch;
  logic [AW-1:0]  ptr_idx;
  logic           data_acc, rd_data_q;
  logic [31:0]    ptr_word, ptr_rdata;

  assign data_acc  = (req.wr || req.rd) && req.addr == L_DATA;
  assign lut_we    = req.wr && req.addr == L_DATA;
  assign lut_re    = req.rd && req.addr == L_DATA;
  assign lut_ch    = ptr_ch;
  assign lut_idx   = ptr_idx;
  assign lut_wdata = req.wdata[SAMPLE_W-1:0];

  always_comb begin
    ptr_word = '0;
    ptr_word[16 +: CHW] = ptr_ch;
    ptr_word[AW-1:0]    = ptr_idx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_ch    <= '0;
      ptr_idx   <= '0;
      rd_data_q <= 1'b0;
      ptr_rdata <= '0;
    end else begin
      rd_data_q <= req.rd && req.addr == L_DATA;
      if (req.rd && req.addr == L_PTR) ptr_rdata <= ptr_word;
      if (req.wr && req.addr == L_PTR) begin
        ptr_ch  <= req.wdata[16 +: CHW];
        ptr_idx <= req.wdata[AW-1:0];
      end else if (data_acc) begin
        ptr_idx <= ptr_idx + 1'b1;
        if (ptr_idx == AW'(DEPTH - 1)) ptr_ch <= (ptr_ch == CHW'(NUM_CH - 1)) ? '0 : ptr_ch + 1'b1;
      end
    end
  end
  // DATA reads are answered straight from the LUT's registered read port.
  assign rdata = rd_data_q ? 32'(lut_rdata) : ptr_rdata;
endmodule
