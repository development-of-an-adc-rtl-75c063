// tb_adc_controller: receives the controller's serial frames with a model of
// each ADC port (SPI: sample on rising SCLK while SEN is low; uWIRE: sample
// on rising SK while CS is high) and checks the 24-bit words, the bit count,
// the idle state of the unused port, the busy flag and transfer time, and
// the length of the reset pulse.
module tb_adc_controller;
  import daq_pkg::*;
  localparam int FW = 24, DIV = 4, RC = 20;
  logic clk = 0, rst_n = 0;
  reg_req_t req;
  logic [31:0] rdata;
  logic spi_sclk, spi_sdata, spi_sen_n, uw_sk, uw_di, uw_cs, adc_reset, busy;
  int checks = 0, failures = 0;
  logic [FW-1:0] spi_sr, uw_sr;
  int spi_bits = 0, uw_bits = 0;
  logic spi_sclk_q = 0, uw_sk_q = 0;

  adc_controller #(.FRAME_W(FW), .CLK_DIV(DIV), .RESET_CYCLES(RC)) dut (.*);
  always #5 clk = ~clk;

  // receiver models of the two ADC control ports
  always @(posedge clk) begin
    spi_sclk_q <= spi_sclk;
    uw_sk_q    <= uw_sk;
    if (spi_sclk && !spi_sclk_q) begin
      if (spi_sen_n) begin failures++; $display("FAIL SCLK edge with SEN high"); end
      spi_sr <= {spi_sr[FW-2:0], spi_sdata}; spi_bits++;
    end
    if (uw_sk && !uw_sk_q) begin
      if (!uw_cs) begin failures++; $display("FAIL SK edge with CS low"); end
      uw_sr <= {uw_sr[FW-2:0], uw_di}; uw_bits++;
    end
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); req = '{wr: 1'b1, rd: 1'b0, addr: a, wdata: d};
    @(negedge clk); req = '0;
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 8; k++) begin
      logic [FW-1:0] w;
      bit uw;
      int t;
      uw = k[0];
      w = FW'($urandom);
      wr(A_CTRL, {31'd0, uw});
      spi_bits = 0; uw_bits = 0;
      wr(A_FRAME, 32'(w));
      check(busy, "busy after start");
      t = 1;
      while (busy) begin @(posedge clk); t++; end
      check(t >= (2 * FW + 2) * DIV - 2 && t <= (2 * FW + 2) * DIV + 2, $sformatf("transfer time %0d", t));
      @(posedge clk);
      if (uw) begin
        check(uw_bits == FW && uw_sr == w, $sformatf("uWIRE frame %h got %h (%0d bits)", w, uw_sr, uw_bits));
        check(spi_bits == 0, "SPI idle in uWIRE mode");
      end else begin
        check(spi_bits == FW && spi_sr == w, $sformatf("SPI frame %h got %h (%0d bits)", w, spi_sr, spi_bits));
        check(uw_bits == 0, "uWIRE idle in SPI mode");
      end
      check(spi_sen_n && !uw_cs, "ports deselected after frame");
    end
    // reset pulse
    begin
      int n;
      wr(A_CTRL, 32'h2);
      n = 0;
      while (adc_reset) begin @(posedge clk); n++; end
      check(n >= RC - 2 && n <= RC + 1, $sformatf("reset pulse %0d cycles", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
