// lut_ram: the reference-waveform lookup table of the SEE checker.
//
// One block-RAM array per channel, DEPTH entries each (1024: one period of
// the test sine). Port A is read by the checker: on every ADC sample (adv)
// it reads all channels at (sample counter + phase) mod DEPTH and advances
// the counter, so the table replays the expected waveform in step with the
// ADC. 'restart' clears the counter (start of a test); 'phase' is the
// host-set offset that lines the table up with the incoming sine.
// Port B is the host port used by the LUT write controller: one channel,
// one index, write or read.
// Timing: both ports have one cycle of read latency; a_valid is adv delayed
// by one cycle. DEPTH must be a power of two (the address wraps).
// The paper gives the table's role, its block-RAM build and the need for a
// phase adjustment; the counter-plus-offset addressing is this design's.
module lut_ram
  import daq_pkg::*;
#(
  parameter int unsigned NUM_CH   = daq_pkg::NUM_CH,
  parameter int unsigned DEPTH    = daq_pkg::LUT_DEPTH,
  parameter int unsigned SAMPLE_W = daq_pkg::SAMPLE_W
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // port A: checker read
  input  logic                                restart,
  input  logic                                adv,
  input  logic [$clog2(DEPTH)-1:0]            phase,
  output logic                                a_valid,
  output logic [NUM_CH-1:0][SAMPLE_W-1:0]     a_data,
  // port B: host access
  input  logic                                b_we,
  input  logic                                b_re,
  input  logic [$clog2(NUM_CH)-1:0]           b_ch,
  input  logic [$clog2(DEPTH)-1:0]            b_idx,
  input  logic [SAMPLE_W-1:0]                 b_wdata,
  output logic [SAMPLE_W-1:0]                 b_rdata
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [AW-1:0] cnt;
  logic [AW-1:0] a_addr;
  logic [NUM_CH-1:0][SAMPLE_W-1:0] b_rd_ch;
  logic [$clog2(NUM_CH)-1:0] b_ch_q;

  assign a_addr = cnt + phase;

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic [SAMPLE_W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (b_we && b_ch == c) mem[b_idx] <= b_wdata;
      if (b_re) b_rd_ch[c] <= mem[b_idx];
      if (adv)  a_data[c]  <= mem[a_addr];
    end
  end

  always_ff @(posedge clk) if (b_re) b_ch_q <= b_ch;
  assign b_rdata = b_rd_ch[b_ch_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      a_valid <= 1'b0;
    end else begin
      a_valid <= adv && !restart;
      if (restart)  cnt <= '0;
      else if (adv) cnt <= cnt + 1'b1;
    end
  end

  initial assert ((1 << AW) == DEPTH) else $error("DEPTH must be a power of two");
endmodule
