// tb_lut_ram: fills the table through the host port with known per-channel
// patterns, reads them back, then checks that the checker port replays
// entry (n + phase) mod DEPTH on the n-th advance for two phase settings,
// with one cycle of latency, and that restart returns to entry 'phase'.
module tb_lut_ram;
  localparam int NC = 16, D = 64, W = 14;
  logic clk = 0, rst_n = 0;
  logic restart = 0, adv = 0, a_valid, b_we = 0, b_re = 0;
  logic [$clog2(D)-1:0] phase = '0, b_idx = '0;
  logic [$clog2(NC)-1:0] b_ch = '0;
  logic [W-1:0] b_wdata = '0, b_rdata;
  logic [NC-1:0][W-1:0] a_data;
  int checks = 0, failures = 0;

  lut_ram #(.NUM_CH(NC), .DEPTH(D), .SAMPLE_W(W)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [W-1:0] pat(int c, int i);
    return W'(c * 997 + i * 31 + 5);
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NC; c++)
      for (int i = 0; i < D; i++) begin
        @(negedge clk); b_we = 1; b_ch = c; b_idx = i; b_wdata = pat(c, i);
      end
    @(negedge clk); b_we = 0;
    for (int k = 0; k < 50; k++) begin
      int c, i;
      c = $urandom_range(0, NC - 1); i = $urandom_range(0, D - 1);
      @(negedge clk); b_re = 1; b_ch = c; b_idx = i;
      @(negedge clk); b_re = 0;
      check(b_rdata == pat(c, i), $sformatf("read-back ch%0d idx%0d", c, i));
    end
    foreach (int_phases[p]) begin
      @(negedge clk); phase = int_phases[p]; restart = 1;
      @(negedge clk); restart = 0;
      for (int n = 0; n < 2 * D; n++) begin
        @(negedge clk); adv = 1;
        @(negedge clk); adv = 0;
        check(a_valid == 1, "valid one cycle after adv");
        for (int c = 0; c < NC; c++)
          check(a_data[c] == pat(c, (n + phase) % D), $sformatf("replay ph%0d n%0d ch%0d", phase, n, c));
      end
    end
    // latency: a_valid the cycle right after adv
    @(negedge clk); adv = 1;
    @(posedge clk); #1 check(a_valid == 1, "a_valid after one cycle");
    @(negedge clk); adv = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int int_phases[2] = '{0, 37};
endmodule
