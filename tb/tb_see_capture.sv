// tb_see_capture: streams numbered sample points into the capture engine
// (AXI memory with random stalls behind it), triggers after the ring has
// wrapped several times, and checks that the engine stops after DEPTH-PRE
// points from the trigger, reports trig_addr at PRE points before the
// trigger point, and that the ring then holds exactly the PRE points before
// the trigger and DEPTH-PRE from it on (ADC and LUT fields), with no
// protocol errors. A second run triggers before the ring is full, and a
// third freezes the window by a host snapshot instead of a trigger; a
// fourth checks the overflow counter when the memory is slower than the data.
module tb_see_capture;
  localparam int NC = 16, W = 14, D = 256, PRE = 64, BL = 16;
  localparam logic [31:0] BASE = 32'h1000_0000;
  localparam int BYTES = NC * 4;
  logic clk = 0, rst_n = 0, arm = 0, in_valid = 0, trig = 0, snapshot = 0;
  logic [NC-1:0][W-1:0] in_adc, in_lut;
  logic [31:0] m_awaddr, trig_addr;
  logic [7:0] m_awlen;
  logic [2:0] m_awsize;
  logic [1:0] m_awburst, m_bresp;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [NC*32-1:0] m_wdata;
  logic [NC*4-1:0] m_wstrb;
  logic running, triggered, done, bresp_err;
  logic [15:0] overflow;
  int checks = 0, failures = 0;

  see_capture #(.NUM_CH(NC), .SAMPLE_W(W), .DEPTH(D), .PRE(PRE), .BURST_LEN(BL),
                .FIFO_DEPTH(64), .BASE_ADDR(BASE)) dut (.*);
  axi_mem_model #(.DW(NC*32), .STALL(1'b1)) u_mem (
    .clk, .rst_n, .awaddr(m_awaddr), .awlen(m_awlen), .awsize(m_awsize), .awburst(m_awburst),
    .awvalid(m_awvalid), .awready(m_awready), .wdata(m_wdata), .wlast(m_wlast),
    .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // point n: ADC field n, LUT field ~n, channel c adds c
  task automatic send(input int n, input bit t, input int gap);
    @(negedge clk);
    in_valid = 1; trig = t;
    for (int c = 0; c < NC; c++) begin in_adc[c] = W'(n + c); in_lut[c] = W'(~n + c); end
    if (gap >= 0) begin                    // gap < 0: one point per cycle
      @(negedge clk); in_valid = 0; trig = 0;
      repeat (gap) @(negedge clk);
    end
  endtask

  task automatic run(input int n_before, input int gap, input bit expect_full, input bit snap = 0);
    int n, sent_after, slot0;
    @(negedge clk); arm = 1;
    @(negedge clk); arm = 0;
    n = 0;
    for (int i = 0; i < n_before; i++) send(n++, 0, gap);
    check(running && !triggered, "recording before trigger");
    if (snap) begin                       // host snapshot instead of an SEE trigger
      @(negedge clk); snapshot = 1;
      @(negedge clk); snapshot = 0;
      check(!triggered, "snapshot waits for the next point");
      send(n++, 0, gap);
    end else send(n++, 1, gap);
    if (gap >= 0) check(triggered, "window frozen");
    sent_after = 1;
    while (running) begin send(n++, 0, gap); sent_after++; end
    if (expect_full) check(sent_after == D - PRE, $sformatf("points from trigger %0d", sent_after));
    for (int i = 0; i < 10; i++) send(n++, 0, gap);   // ignored after stop
    @(negedge clk); in_valid = 0; trig = 0;
    while (!done) @(posedge clk);
    if (expect_full) check(trig_addr == BASE + ((n_before - PRE) & (D - 1)) * BYTES, $sformatf("trig_addr %h", trig_addr));
    check(u_mem.errors == 0 && !bresp_err, "AXI protocol");
    if (expect_full) begin
      for (int k = 0; k < D; k++) begin
        int exp_n;
        logic [NC*32-1:0] w;
        exp_n = n_before - PRE + k;
        w = u_mem.mem[(BASE / BYTES) + (((trig_addr - BASE) / BYTES + k) % D)];
        for (int c = 0; c < NC; c++) begin
          check(w[32*c +: W] == W'(exp_n + c) && w[32*c + 16 +: W] == W'(~exp_n + c),
                $sformatf("window point %0d ch %0d", k, c));
        end
      end
    end
  endtask

  initial begin
    in_adc = '0; in_lut = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(3 * D + 37, 1, 1);                // ring wrapped 3 times before the event
    check(overflow == 0, "no overflow at half rate");
    check(u_mem.bursts > 0, "bursts issued");
    run(100, 1, 1);                       // second capture after re-arm
    run(D + 77, 2, 1, 1);                 // snapshot requested by the host
    // back-to-back points overrun the stalled memory
    run(D, -1, 0);
    check(overflow > 0, $sformatf("overflow counted %0d", overflow));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
