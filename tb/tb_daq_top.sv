// tb_daq_top: end-to-end test of the DAQ firmware at its full default size
// (16 channels, 1024-point LUT, 16384-point capture, 1024 pre-trigger
// points). It plays the ADC (a 14-bit sine of 1024 samples per period with
// a little noise, on 16 serial LVDS lanes and on 16 JESD204B lanes through
// the behavioural transmitter), the processor's AXI4-Lite master and the
// DDR3 memory, and runs the SEE test procedure:
//   1. arm with the threshold at maximum, take a 16384-point host snapshot,
//      average its 16 periods into the reference waveforms, load the LUT;
//   2. re-arm, find the LUT phase from the recorded ADC/LUT pairs, set it;
//   3. lower the threshold; a deviation below the threshold must not flag;
//      a bit flip in one channel must flag an SEE, after the ring has
//      wrapped, and the capture window must hold 1024 clean points before it;
//   4. switch the source to JESD and repeat 2-3 with a multi-point upset;
//   5. configure the ADC over SPI and uWIRE, pulse its reset, run SYNC.
// Every mechanism is counted, and one that never happened is a failure.
module tb_daq_top;
  import daq_pkg::*;
  localparam int NC = NUM_CH, W = SAMPLE_W, LD = LUT_DEPTH, CD = CAPTURE_DEPTH, PRE = PRE_TRIGGER;
  localparam logic [31:0] BASE = 32'h1000_0000;
  localparam int BYTES = NC * 4;
  localparam logic [31:0] ADC_CTRL = 32'h0000, REGS = 32'h1000, LUTC = 32'h2000;

  logic clk = 0, clk_smp = 0, rst_n = 0;
  logic lvds_bit_en, lvds_fco;
  logic [NC-1:0] lvds_din;
  logic jesd_valid, jesd_sync_n, sample_req;
  logic [NC-1:0][7:0] jesd_octet;
  logic [NC-1:0] jesd_is_k;
  logic [NC-1:0][13:0] jesd_samples;
  int n_repl;
  logic [31:0] s_awaddr, s_wdata, s_araddr, s_rdata;
  logic [3:0] s_wstrb;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [1:0] s_bresp, s_rresp;
  logic [31:0] m_awaddr;
  logic [7:0] m_awlen;
  logic [2:0] m_awsize;
  logic [1:0] m_awburst, m_bresp;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [NC*32-1:0] m_wdata;
  logic [NC*4-1:0] m_wstrb;
  logic spi_sclk, spi_sdata, spi_sen_n, uw_sk, uw_di, uw_cs, adc_reset, sync_clk, see_irq;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_lut_load = 0, n_phase = 0, n_below = 0, n_see_lvds = 0, n_see_jesd = 0, n_wrap = 0;
  int n_switch = 0, n_spi = 0, n_uw = 0, n_reset = 0, n_sync = 0, n_multi = 0, n_snap = 0;
  int lut_ref [NUM_CH][LUT_DEPTH];

  daq_top dut (.*);

  axi_mem_model #(.DW(NC*32), .STALL(1'b1)) u_mem (
    .clk, .rst_n, .awaddr(m_awaddr), .awlen(m_awlen), .awsize(m_awsize), .awburst(m_awburst),
    .awvalid(m_awvalid), .awready(m_awready), .wdata(m_wdata), .wlast(m_wlast),
    .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready));

  jesd_tx_model #(.NUM_LANES(NC), .K_MF(32)) u_jtx (
    .clk, .rst_n, .en(1'b1), .sync_n(jesd_sync_n), .samples(jesd_samples), .sample_req,
    .out_valid(jesd_valid), .out_octet(jesd_octet), .out_is_k(jesd_is_k), .n_repl);

  always #5 clk = ~clk;
  always #12.5 clk_smp = ~clk_smp;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- ADC model ----------------
  // expected waveform of channel c at sample s, and an injected upset table
  function automatic int wave(int c, longint s);
    real ph;
    ph = 2.0 * 3.14159265358979 * real'((s + 211) % LD) / real'(LD);
    return 8192 + int'((4000.0 + 150.0 * c) * $sin(ph));
  endfunction
  int inj_lvds [longint][int];   // [sample][channel] -> value to send instead
  int inj_jesd [longint][int];

  function automatic logic [13:0] adc_word(int c, longint s, bit jesd);
    int v;
    v = wave(c, s) + $urandom_range(0, 4) - 2;
    if (!jesd && inj_lvds.exists(s) && inj_lvds[s].exists(c)) v = inj_lvds[s][c];
    if ( jesd && inj_jesd.exists(s) && inj_jesd[s].exists(c)) v = inj_jesd[s][c];
    return 14'(v);
  endfunction

  longint lvds_s = 0;          // LVDS sample being sent
  longint jesd_s = 0;          // next JESD sample
  always @(negedge clk) begin : lvds_tx
    static int b = W - 1;
    static logic [NC-1:0][13:0] word;
    if (!rst_n) begin
      lvds_bit_en = 0; lvds_fco = 0; lvds_din = '0;
    end else begin
      if (b == W - 1) for (int c = 0; c < NC; c++) word[c] = adc_word(c, lvds_s, 0);
      lvds_bit_en = 1;
      lvds_fco    = (b >= W / 2);
      for (int c = 0; c < NC; c++) lvds_din[c] = word[c][b];
      if (b == 0) begin b = W - 1; lvds_s++; end
      else b--;
    end
  end
  always @(posedge clk) if (sample_req) begin
    for (int c = 0; c < NC; c++) jesd_samples[c] <= adc_word(c, jesd_s + 1, 1);
    jesd_s <= jesd_s + 1;
  end
  initial for (int c = 0; c < NC; c++) jesd_samples[c] = 14'(wave(c, 0));

  // ---------------- AXI4-Lite master ----------------
  task automatic axi_wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); s_awaddr = a; s_wdata = d; s_awvalid = 1; s_wvalid = 1;
    do @(posedge clk); while (!s_awready);
    @(negedge clk); s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    if (s_bresp != 2'b00) begin failures++; $display("FAIL write resp %h", a); end
    @(negedge clk); s_bready = 0;
  endtask
  task automatic axi_rd(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk); s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0; s_rready = 1;
    do @(posedge clk); while (!s_rvalid);
    d = s_rdata;
    @(negedge clk); s_rready = 0;
  endtask

  // ---------------- configuration port receivers ----------------
  logic [23:0] spi_sr, uw_sr;
  int spi_bits = 0, uw_bits = 0;
  always @(posedge spi_sclk) if (!spi_sen_n) begin spi_sr = {spi_sr[22:0], spi_sdata}; spi_bits++; end
  always @(posedge uw_sk)    if (uw_cs)      begin uw_sr  = {uw_sr[22:0],  uw_di};     uw_bits++;  end
  int sync_edges = 0;
  always @(posedge sync_clk) sync_edges++;

  // ---------------- host procedure helpers ----------------
  function automatic logic [NC*32-1:0] ring(int slot);
    int unsigned idx;
    idx = BASE / BYTES + (slot % CD);
    return u_mem.mem.exists(idx) ? u_mem.mem[idx] : '0;
  endfunction
  function automatic int adc_f(logic [NC*32-1:0] w, int c); return int'(w[32*c +: W]); endfunction
  function automatic int lut_f(logic [NC*32-1:0] w, int c); return int'(w[32*c + 16 +: W]); endfunction

  task automatic wait_samples(input int n, input bit jesd);
    longint s0;
    s0 = jesd ? jesd_s : lvds_s;
    while ((jesd ? jesd_s : lvds_s) < s0 + n) @(posedge clk);
    repeat (200) @(posedge clk);   // let the capture engine drain
  endtask

  // Re-arm (threshold at maximum), then align the LUT with the incoming data:
  // the recorded points hold ADC and LUT (read at phase 0) side by side.
  task automatic arm_and_phase(input bit jesd, input int src);
    int best_p, best_err;
    axi_wr(REGS + R_THRESHOLD, 32'h3FFF);
    axi_wr(REGS + R_PHASE, 0);
    axi_wr(REGS + R_CTRL, 32'(src << 1) | 32'h5);   // arm, source, SYNC on
    wait_samples(LD + 64, jesd);
    best_p = 0; best_err = 32'h7FFF_FFFF;
    for (int p = 0; p < LD; p++) begin
      int e;
      e = 0;
      for (int k = 0; k < 64; k += 4) begin
        int a, l;
        a = adc_f(ring(k), 0);
        l = lut_f(ring(k + p), 0);      // LUT[k+p] seen p points later at phase 0
        e += (a > l) ? a - l : l - a;
      end
      if (e < best_err) begin best_err = e; best_p = p; end
    end
    axi_wr(REGS + R_PHASE, 32'(best_p));
    n_phase++;
  endtask

  // Inject an upset some samples ahead of the source's current position, wait
  // for the capture to finish and check the recorded window.
  task automatic upset_and_check(input bit jesd, input int chans[], input int npts,
                                 input int after, input logic [31:0] exp_events);
    longint s_up;
    logic [31:0] d, taddr, mask, fsmp;
    int slot0, exp_mask, thr;
    thr = 60;
    s_up = (jesd ? jesd_s : lvds_s) + after;
    exp_mask = 0;
    foreach (chans[i]) begin
      exp_mask |= 1 << chans[i];
      for (int k = 0; k < npts; k++)
        if (jesd) inj_jesd[s_up + k][chans[i]] = wave(chans[i], s_up + k) ^ 32'h800;
        else      inj_lvds[s_up + k][chans[i]] = wave(chans[i], s_up + k) ^ 32'h800;
    end
    while (!see_irq && (jesd ? jesd_s : lvds_s) < s_up + 100) @(posedge clk);
    check(see_irq, "SEE flagged");
    wait_samples(CD - PRE + 64, jesd);
    axi_rd(REGS + R_STATUS, d);
    check(d[0] && d[1] && !d[5], $sformatf("status flag+done %h", d));
    axi_rd(REGS + R_CH_MASK, mask);
    check(mask == 32'(exp_mask), $sformatf("channel mask %h exp %h", mask, exp_mask));
    axi_rd(REGS + R_EVENTS, d);
    check(d == exp_events, $sformatf("event count %0d", d));
    axi_rd(REGS + R_FLAG_SMP, fsmp);
    axi_rd(REGS + R_TRIG_ADDR, taddr);
    axi_rd(REGS + R_OVERFLOW, d);
    check(d == 0, "no capture overflow");
    check(taddr == BASE + ((fsmp - PRE) % CD) * BYTES, $sformatf("trig addr %h flag sample %0d", taddr, fsmp));
    if (fsmp >= CD) n_wrap++;
    slot0 = (taddr - BASE) / BYTES;
    // the window: PRE clean points, the upset at PRE, then the rest
    for (int k = 0; k < CD; k++) begin
      logic [NC*32-1:0] w;
      bit over;
      w = ring(slot0 + k);
      over = 0;
      for (int c = 0; c < NC; c++) begin
        int a, l;
        a = adc_f(w, c); l = lut_f(w, c);
        if ((a > l ? a - l : l - a) > thr) over = 1;
      end
      if (k < PRE) check(!over, $sformatf("clean pre-trigger point %0d", k));
      if (k == PRE) begin
        check(over, "upset recorded at the pre-trigger offset");
        foreach (chans[i])
          check(adc_f(w, chans[i]) == (wave(chans[i], s_up) ^ 32'h800),
                $sformatf("upset value ch%0d %0d", chans[i], adc_f(w, chans[i])));
      end
    end
  endtask

  initial begin
    logic [31:0] d;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0; s_wstrb = 4'hF;
    s_awaddr = 0; s_wdata = 0; s_araddr = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);

    // ---- 1. snapshot 16384 points and build the reference waveforms:
    //         ring slot j was read against LUT index j mod 1024
    axi_wr(REGS + R_THRESHOLD, 32'h3FFF);
    axi_wr(REGS + R_CTRL, 32'h1);                 // arm, LVDS
    wait_samples(2 * LD, 0);
    axi_wr(REGS + R_CTRL, 32'h10);                // snapshot
    wait_samples(CD - PRE + 64, 0);
    axi_rd(REGS + R_STATUS, d);
    check(d[1] && !d[0], $sformatf("snapshot done without an SEE flag (%h)", d));
    if (d[1]) n_snap++;
    axi_rd(REGS + R_TRIG_ADDR, d);
    begin
      int sum [NC][LD];
      int cnt [LD];
      int slot0;
      slot0 = (d - BASE) / BYTES;
      for (int i = 0; i < LD; i++) begin cnt[i] = 0; for (int c = 0; c < NC; c++) sum[c][i] = 0; end
      for (int k = 0; k < CD; k++) begin
        int j;
        j = (slot0 + k) % CD;
        cnt[j % LD]++;
        for (int c = 0; c < NC; c++) sum[c][j % LD] += adc_f(ring(j), c);
      end
      check(cnt[0] == CD / LD, "16 periods in the snapshot");
      axi_wr(LUTC + L_PTR, 0);
      for (int c = 0; c < NC; c++)
        for (int i = 0; i < LD; i++) begin
          lut_ref[c][i] = (sum[c][i] + cnt[i] / 2) / cnt[i];
          axi_wr(LUTC + L_DATA, 32'(lut_ref[c][i]));
        end
    end
    axi_wr(LUTC + L_PTR, 32'h0003_0010);          // spot read-back
    axi_rd(LUTC + L_DATA, d);
    check(d == 32'(lut_ref[3][16]), "LUT read-back");
    n_lut_load++;

    // ---- 2./3. LVDS run: phase, threshold, below-threshold deviation, SEU
    arm_and_phase(0, 0);
    axi_wr(REGS + R_THRESHOLD, 60);
    wait_samples(CD, 0);                          // ring wraps before the upset
    inj_lvds[lvds_s + 20][2] = wave(2, lvds_s + 20) + 40;   // 40 < 60: no event
    wait_samples(100, 0);
    check(!see_irq, "deviation below threshold is not an event");
    if (!see_irq) n_below++;
    upset_and_check(0, '{5}, 1, 50, 1);
    n_see_lvds++;

    // ---- 4. JESD run with a multi-point upset on two channels
    check(jesd_sync_n, "JESD link synchronised");
    axi_rd(REGS + R_STATUS, d);
    check(d[3], "JESD link up");
    arm_and_phase(1, 1);
    axi_rd(REGS + R_CTRL, d);
    check(d[1], "source is JESD");
    n_switch++;
    axi_wr(REGS + R_THRESHOLD, 60);
    wait_samples(PRE + 200, 1);             // window must start after the phase is set
    upset_and_check(1, '{2, 9}, 3, 40, 2);
    n_see_jesd++; n_multi++;
    check(n_repl > 0, $sformatf("JESD character replacement seen (%0d)", n_repl));

    // ---- 5. ADC configuration, reset, SYNC
    axi_wr(ADC_CTRL + A_CTRL, 0);
    axi_wr(ADC_CTRL + A_FRAME, 32'h0A_5A3C);
    do axi_rd(ADC_CTRL + A_STATUS, d); while (d[0]);
    check(spi_bits == 24 && spi_sr == 24'h0A_5A3C, $sformatf("SPI frame %h", spi_sr));
    if (spi_bits == 24) n_spi++;
    axi_wr(ADC_CTRL + A_CTRL, 1);
    axi_wr(ADC_CTRL + A_FRAME, 32'h14_00F1);
    do axi_rd(ADC_CTRL + A_STATUS, d); while (d[0]);
    check(uw_bits == 24 && uw_sr == 24'h14_00F1, $sformatf("uWIRE frame %h", uw_sr));
    if (uw_bits == 24) n_uw++;
    axi_wr(ADC_CTRL + A_CTRL, 32'h3);
    check(adc_reset, "ADC reset pin asserted");
    if (adc_reset) n_reset++;
    check(sync_edges > 1000, $sformatf("SYNC clock running (%0d edges)", sync_edges));
    if (sync_edges > 1000) n_sync++;
    check(u_mem.errors == 0, "AXI4 protocol at the memory");

    // ---- every mechanism must have happened
    check(n_lut_load > 0, "mechanism: LUT load");
    check(n_snap > 0,     "mechanism: host snapshot");
    check(n_phase > 0,    "mechanism: phase adjustment");
    check(n_below > 0,    "mechanism: deviation below threshold");
    check(n_see_lvds > 0, "mechanism: SEE on LVDS");
    check(n_see_jesd > 0, "mechanism: SEE on JESD");
    check(n_multi > 0,    "mechanism: multi-point upset");
    check(n_wrap > 0,     "mechanism: ring wrap before trigger");
    check(n_switch > 0,   "mechanism: source switch");
    check(n_spi > 0 && n_uw > 0, "mechanism: SPI and uWIRE");
    check(n_reset > 0,    "mechanism: ADC reset");
    check(n_sync > 0,     "mechanism: SYNC clock");
    $display("mechanisms: snapshot=%0d lut_load=%0d phase=%0d below=%0d see_lvds=%0d see_jesd=%0d multi=%0d wrap=%0d switch=%0d spi=%0d uwire=%0d reset=%0d sync=%0d jesd_repl=%0d",
             n_snap, n_lut_load, n_phase, n_below, n_see_lvds, n_see_jesd, n_multi, n_wrap, n_switch, n_spi, n_uw, n_reset, n_sync, n_repl);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
