// tb_tid_workload: the total-dose test procedure on the full-size design.
// An ADC model sends a 14-bit sine (1024 samples per period) on the 16 LVDS
// lanes with uniform noise whose amplitude grows from one recording to the
// next, standing in for a device degrading with dose. For each recording the
// host arms the recorder with the threshold at maximum, takes a 16384-point
// snapshot, reads it back from the memory model and computes the SNR of
// channels 0 and 15 the way the offline analysis does: signal power in the
// sine's frequency bin (16 periods in 16384 points), noise power = total
// AC power minus signal. Checks: the snapshot completes without an SEE flag,
// the window is 16384 consecutive points, the SNR matches the noise that
// was sent to within 1 dB, and it falls as the noise grows.
module tb_tid_workload;
  import daq_pkg::*;
  localparam int NC = NUM_CH, W = SAMPLE_W, LD = LUT_DEPTH, CD = CAPTURE_DEPTH, PRE = PRE_TRIGGER;
  localparam logic [31:0] BASE = 32'h1000_0000;
  localparam int BYTES = NC * 4;
  localparam logic [31:0] REGS = 32'h1000;
  localparam real PI = 3.14159265358979;

  logic clk = 0, clk_smp = 0, rst_n = 0;
  logic lvds_bit_en, lvds_fco;
  logic [NC-1:0] lvds_din;
  logic jesd_sync_n;
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

  daq_top dut (
    .clk, .rst_n, .clk_smp, .lvds_bit_en, .lvds_fco, .lvds_din,
    .jesd_valid(1'b0), .jesd_octet('0), .jesd_is_k('0), .jesd_sync_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awvalid, .m_awready,
    .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready, .m_bresp, .m_bvalid, .m_bready,
    .spi_sclk, .spi_sdata, .spi_sen_n, .uw_sk, .uw_di, .uw_cs, .adc_reset, .sync_clk, .see_irq);

  axi_mem_model #(.DW(NC*32), .STALL(1'b1)) u_mem (
    .clk, .rst_n, .awaddr(m_awaddr), .awlen(m_awlen), .awsize(m_awsize), .awburst(m_awburst),
    .awvalid(m_awvalid), .awready(m_awready), .wdata(m_wdata), .wlast(m_wlast),
    .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready));

  always #5 clk = ~clk;
  always #12.5 clk_smp = ~clk_smp;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ADC model: sine of amplitude 4000 + 150*c around mid-scale plus uniform
  // integer noise in [-noise, +noise]
  int noise = 2;
  function automatic real amp(int c); return 4000.0 + 150.0 * c; endfunction
  longint lvds_s = 0;
  always @(negedge clk) begin : lvds_tx
    static int b = W - 1;
    static logic [NC-1:0][13:0] word;
    if (!rst_n) begin
      lvds_bit_en = 0; lvds_fco = 0; lvds_din = '0;
    end else begin
      if (b == W - 1)
        for (int c = 0; c < NC; c++)
          word[c] = 14'(8192 + int'(amp(c) * $sin(2.0 * PI * real'((lvds_s + 77) % LD) / real'(LD)))
                        + $urandom_range(0, 2 * noise) - noise);
      lvds_bit_en = 1;
      lvds_fco    = (b >= W / 2);
      for (int c = 0; c < NC; c++) lvds_din[c] = word[c][b];
      if (b == 0) begin b = W - 1; lvds_s++; end
      else b--;
    end
  end

  task automatic axi_wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); s_awaddr = a; s_wdata = d; s_awvalid = 1; s_wvalid = 1;
    do @(posedge clk); while (!s_awready);
    @(negedge clk); s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
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

  // offline analysis of one channel of the snapshot window
  function automatic real snr_db(int slot0, int c);
    real mean, tot, re, im, sig, x;
    mean = 0.0;
    for (int k = 0; k < CD; k++) mean += real'(u_mem.mem[BASE / BYTES + (slot0 + k) % CD][32*c +: W]);
    mean /= CD;
    tot = 0.0; re = 0.0; im = 0.0;
    for (int k = 0; k < CD; k++) begin
      x = real'(u_mem.mem[BASE / BYTES + (slot0 + k) % CD][32*c +: W]) - mean;
      tot += x * x;
      re  += x * $cos(2.0 * PI * (CD / LD) * k / CD);
      im  += x * $sin(2.0 * PI * (CD / LD) * k / CD);
    end
    sig = 2.0 * (re * re + im * im) / (real'(CD) * real'(CD));   // power of the sine
    tot /= CD;
    return 10.0 * $log10(sig / (tot - sig));
  endfunction

  initial begin
    logic [31:0] d;
    real prev_snr;
    int levels [3] = '{2, 8, 32};
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0; s_wstrb = 4'hF;
    s_awaddr = 0; s_wdata = 0; s_araddr = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);
    prev_snr = 1000.0;
    foreach (levels[r]) begin
      longint s0;
      int slot0;
      real snr0, snr15, exp0, exp15, nvar;
      noise = levels[r];
      axi_wr(REGS + R_THRESHOLD, 32'h3FFF);
      axi_wr(REGS + R_CTRL, 32'h1);                   // arm
      s0 = lvds_s;
      while (lvds_s < s0 + 2000) @(posedge clk);
      axi_wr(REGS + R_CTRL, 32'h10);                  // snapshot
      do begin
        repeat (1000) @(posedge clk);
        axi_rd(REGS + R_STATUS, d);
      end while (!d[1]);
      check(!d[0], "no SEE flag in a TID recording");
      axi_rd(REGS + R_TRIG_ADDR, d);
      slot0 = (d - BASE) / BYTES;
      // the window is 16384 consecutive points: ADC of neighbours follows the sine
      for (int k = 1; k < CD; k += 97) begin
        int a0, a1;
        a0 = int'(u_mem.mem[BASE / BYTES + (slot0 + k - 1) % CD][W-1:0]);
        a1 = int'(u_mem.mem[BASE / BYTES + (slot0 + k) % CD][W-1:0]);
        check((a1 > a0 ? a1 - a0 : a0 - a1) <= 30 + 2 * noise, $sformatf("consecutive points %0d", k));
      end
      nvar  = (real'((2 * noise + 1) * (2 * noise + 1)) - 1.0) / 12.0 + 1.0 / 12.0;
      exp0  = 10.0 * $log10(amp(0) * amp(0) / 2.0 / nvar);
      exp15 = 10.0 * $log10(amp(15) * amp(15) / 2.0 / nvar);
      snr0  = snr_db(slot0, 0);
      snr15 = snr_db(slot0, 15);
      $display("recording %0d: noise +-%0d  SNR ch0 %.2f dB (expected %.2f)  ch15 %.2f dB (expected %.2f)",
               r, noise, snr0, exp0, snr15, exp15);
      check(snr0 > exp0 - 1.0 && snr0 < exp0 + 1.0, "SNR channel 0");
      check(snr15 > exp15 - 1.0 && snr15 < exp15 + 1.0, "SNR channel 15");
      check(snr0 < prev_snr, "SNR falls as the device degrades");
      prev_snr = snr0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
