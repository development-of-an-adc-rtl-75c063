// see_capture: records the ADC and LUT data around an SEE event into a
// circular buffer in the DDR3 memory of the processing system.
//
// Once armed, every sample point from the checker (all channels' ADC and LUT
// samples) is written, one 512-bit AXI4 beat per point, to the next slot of a
// ring of DEPTH points starting at BASE_ADDR. Writing all the time means the
// PRE points before an event are already in memory when the trigger comes.
// On trig the engine accepts DEPTH-PRE more points (the trigger point
// included) and stops, so the ring then holds PRE points before the event and
// DEPTH-PRE from it on. trig_addr is the byte address of the oldest point of
// that window; the host reads DEPTH points from there (wrapping at the end of
// the ring). done rises when the last beat has been acknowledged.
//
// Record of channel c in beat bits [32c+31:32c]: [29:16] LUT, [13:0] ADC.
// AXI4: INCR bursts of BURST_LEN beats, full-width beats, one burst in flight.
// A FIFO of FIFO_DEPTH points absorbs memory back-pressure; a point arriving
// with the FIFO full is dropped and counted in overflow. An arm that comes
// while a burst is in flight waits until the burst completes.
// The capture length (16 thousand points, here 16384), the 1024 pre-trigger
// points and the DDR3 destination are the paper's; ring-buffer recording,
// record format, burst length and FIFO are this design's choices.
module see_capture
  import daq_pkg::*;
#(
  parameter int unsigned NUM_CH     = daq_pkg::NUM_CH,
  parameter int unsigned SAMPLE_W   = daq_pkg::SAMPLE_W,
  parameter int unsigned DEPTH      = daq_pkg::CAPTURE_DEPTH,
  parameter int unsigned PRE        = daq_pkg::PRE_TRIGGER,
  parameter int unsigned BURST_LEN  = 16,
  parameter int unsigned FIFO_DEPTH = 64,
  parameter logic [31:0] BASE_ADDR  = 32'h1000_0000
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            arm,
  input  logic                            in_valid,
  input  logic [NUM_CH-1:0][SAMPLE_W-1:0] in_adc,
  input  logic [NUM_CH-1:0][SAMPLE_W-1:0] in_lut,
  input  logic                            trig,
  input  logic                            snapshot,   // host request: freeze a window now
  // AXI4 write master towards the DDR3 memory
  output logic [31:0]                     m_awaddr,
  output logic [7:0]                      m_awlen,
  output logic [2:0]                      m_awsize,
  output logic [1:0]                      m_awburst,
  output logic                            m_awvalid,
  input  logic                            m_awready,
  output logic [NUM_CH*32-1:0]            m_wdata,
  output logic [NUM_CH*4-1:0]             m_wstrb,
  output logic                            m_wlast,
  output logic                            m_wvalid,
  input  logic                            m_wready,
  input  logic [1:0]                      m_bresp,
  input  logic                            m_bvalid,
  output logic                            m_bready,
  // status
  output logic                            running,
  output logic                            triggered,
  output logic                            done,
  output logic [31:0]                     trig_addr,
  output logic [15:0]                     overflow,
  output logic                            bresp_err
);
  localparam int unsigned DW     = NUM_CH * 32;
  localparam int unsigned BYTES  = DW / 8;
  localparam int unsigned IW     = $clog2(DEPTH);
  localparam int unsigned LW     = $clog2(BURST_LEN + 1);
  localparam int unsigned POST   = DEPTH - PRE;       // points from the trigger on

  typedef enum logic [1:0] {B_IDLE, B_AW, B_W, B_B} burst_state_e;
  burst_state_e bst;

  logic [DW-1:0] rec;
  logic          accept, push, pop, fifo_full, fifo_empty, fifo_clr;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_cnt;
  logic [IW-1:0] wr_idx;        // ring slot of the next accepted point
  logic [IW-1:0] burst_idx;     // ring slot of the next burst
  logic [$clog2(POST+1)-1:0] post_left;
  logic [LW-1:0] beats_left;
  logic          arm_pend, do_arm;
  logic          snap_pend, fire;

  always_comb begin
    rec = '0;
    for (int c = 0; c < NUM_CH; c++) begin
      rec[32*c +: SAMPLE_W]      = in_adc[c];
      rec[32*c + 16 +: SAMPLE_W] = in_lut[c];
    end
  end

  assign do_arm   = (arm || arm_pend) && bst == B_IDLE;
  assign fifo_clr = do_arm;
  assign accept   = running && in_valid && !arm_pend && !arm;
  assign push     = accept && !fifo_full;
  assign fire     = (trig || snap_pend) && !triggered;
  assign pop      = (bst == B_W) && m_wready;

  sync_fifo #(.W(DW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clr(fifo_clr),
    .push, .wdata(rec), .pop, .rdata(m_wdata),
    .full(fifo_full), .empty(fifo_empty), .count(fifo_cnt)
  );

  assign m_awsize  = 3'($clog2(BYTES));
  assign m_awburst = 2'b01;   // INCR
  assign m_wstrb   = '1;
  assign m_wvalid  = (bst == B_W) && !fifo_empty;
  assign m_wlast   = (beats_left == LW'(1));
  assign m_bready  = (bst == B_B);
  assign m_awvalid = (bst == B_AW);
  assign done      = triggered && !running && bst == B_IDLE && fifo_empty;

  // capture window bookkeeping
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running   <= 1'b0;
      triggered <= 1'b0;
      wr_idx    <= '0;
      post_left <= '0;
      trig_addr <= BASE_ADDR;
      overflow  <= '0;
      arm_pend  <= 1'b0;
      snap_pend <= 1'b0;
    end else begin
      if (snapshot && running && !triggered) snap_pend <= 1'b1;
      if (arm && bst != B_IDLE) arm_pend <= 1'b1;
      if (do_arm) begin
        arm_pend  <= 1'b0;
        snap_pend <= 1'b0;
        running   <= 1'b1;
        triggered <= 1'b0;
        wr_idx    <= '0;
        overflow  <= '0;
      end else if (accept) begin
        if (fifo_full) begin
          if (overflow != 16'hFFFF) overflow <= overflow + 1'b1;
        end else begin
          wr_idx <= wr_idx + 1'b1;
        end
        if (fire) begin
          triggered <= 1'b1;
          snap_pend <= 1'b0;
          trig_addr <= BASE_ADDR + 32'(IW'(wr_idx - IW'(PRE))) * BYTES;
          post_left <= ($clog2(POST+1))'(POST - 1);
          if (POST == 1) running <= 1'b0;
        end else if (triggered) begin
          post_left <= post_left - 1'b1;
          if (post_left == ($clog2(POST+1))'(1)) running <= 1'b0;
        end
      end
    end
  end

  // AXI4 burst engine
  logic [LW-1:0] next_len;
  assign next_len = (fifo_cnt >= ($bits(fifo_cnt))'(BURST_LEN)) ? LW'(BURST_LEN) : LW'(fifo_cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bst        <= B_IDLE;
      burst_idx  <= '0;
      beats_left <= '0;
      m_awaddr   <= '0;
      m_awlen    <= '0;
      bresp_err  <= 1'b0;
    end else begin
      unique case (bst)
        B_IDLE: begin
          if (do_arm) begin
            burst_idx <= '0;
            bresp_err <= 1'b0;
          end else if (fifo_cnt >= ($bits(fifo_cnt))'(BURST_LEN) ||
                       (!running && !fifo_empty)) begin
            // full bursts while recording; the remainder once recording stops
            beats_left <= next_len;
            m_awlen    <= 8'(next_len - 1'b1);
            m_awaddr   <= BASE_ADDR + 32'(burst_idx) * BYTES;
            burst_idx  <= burst_idx + IW'(next_len);
            bst        <= B_AW;
          end
        end
        B_AW: if (m_awready) bst <= B_W;
        B_W: begin
          if (m_wready && !fifo_empty) begin
            beats_left <= beats_left - 1'b1;
            if (beats_left == LW'(1)) bst <= B_B;
          end
        end
        B_B: begin
          if (m_bvalid) begin
            if (m_bresp != 2'b00) bresp_err <= 1'b1;
            bst <= B_IDLE;
          end
        end
        default: bst <= B_IDLE;
      endcase
    end
  end

  initial begin
    assert (DEPTH % BURST_LEN == 0 && (1 << IW) == DEPTH) else $error("DEPTH must be a power of two and a multiple of BURST_LEN");
    assert (PRE < DEPTH) else $error("PRE must be below DEPTH");
    assert (FIFO_DEPTH >= BURST_LEN) else $error("FIFO must hold a burst");
  end

  // AXI4 rules: a valid request is held until it is accepted.
  assert property (@(posedge clk) disable iff (!rst_n) m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr) && $stable(m_awlen));
  assert property (@(posedge clk) disable iff (!rst_n) m_wvalid && !m_wready |=> m_wvalid && $stable(m_wdata) && $stable(m_wlast));
endmodule
