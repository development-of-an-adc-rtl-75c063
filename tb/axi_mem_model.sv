// axi_mem_model: behavioural stand-in for the processing system's DDR3
// memory as seen from an AXI4 write master (write channels only). Beats are
// stored in an associative array indexed by byte address / (DW/8). With
// STALL set, awready and wready are withheld at random. It counts bursts,
// beats and protocol errors (wlast not on the last beat of a burst, a burst
// crossing a 4 KiB boundary, a narrow or non-INCR burst).
module axi_mem_model #(
  parameter int unsigned DW    = 512,
  parameter bit          STALL = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [31:0]       awaddr,
  input  logic [7:0]        awlen,
  input  logic [2:0]        awsize,
  input  logic [1:0]        awburst,
  input  logic              awvalid,
  output logic              awready,
  input  logic [DW-1:0]     wdata,
  input  logic              wlast,
  input  logic              wvalid,
  output logic              wready,
  output logic [1:0]        bresp,
  output logic              bvalid,
  input  logic              bready
);
  localparam int unsigned BYTES = DW / 8;
  logic [DW-1:0] mem [int unsigned];
  int unsigned bursts = 0, beats = 0, errors = 0;
  bit          in_burst = 0;
  int unsigned cur_idx, beats_left;

  assign bresp = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      awready  <= 1'b0;
      wready   <= 1'b0;
      bvalid   <= 1'b0;
      in_burst <= 0;
    end else begin
      awready <= !in_burst && !bvalid && (!STALL || $urandom_range(0, 2) != 0);
      wready  <= in_burst && (!STALL || $urandom_range(0, 3) != 0);
      if (bvalid && bready) bvalid <= 1'b0;
      if (awvalid && awready) begin
        if ((awaddr % 4096) + (awlen + 1) * BYTES > 4096) errors++;
        if (awsize != 3'($clog2(BYTES)) || awburst != 2'b01) errors++;
        cur_idx    <= awaddr / BYTES;
        beats_left <= awlen + 1;
        in_burst   <= 1;
        awready    <= 1'b0;
        bursts++;
      end
      if (wvalid && wready && in_burst) begin
        mem[cur_idx] = wdata;
        beats++;
        cur_idx    <= cur_idx + 1;
        beats_left <= beats_left - 1;
        if (wlast != (beats_left == 1)) errors++;
        if (beats_left == 1) begin
          in_burst <= 0;
          wready   <= 1'b0;
          bvalid   <= 1'b1;
        end
      end
    end
  end
endmodule
