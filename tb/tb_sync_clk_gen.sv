// tb_sync_clk_gen: checks that the SYNC divider gives a 50 % square wave at
// 1/DIV of the sampling clock (10 MHz from 40 MHz), stays low while disabled,
// and starts only after the two-flop enable synchroniser.
module tb_sync_clk_gen;
  logic clk_smp = 0, rst_n = 0, en = 0, sync_out;
  int checks = 0, failures = 0;
  int cyc = 0;

  sync_clk_gen dut (.clk_smp, .rst_n, .en, .sync_out);

  always #12.5 clk_smp = ~clk_smp;   // 40 MHz
  always @(posedge clk_smp) cyc++;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk_smp);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rises, highs, last_rise, period;
    repeat (3) @(posedge clk_smp);
    rst_n = 1;
    repeat (10) begin @(posedge clk_smp); #1 check(sync_out == 0, "low while disabled"); end
    en = 1;
    @(posedge clk_smp); #1 check(sync_out == 0, "synchroniser delay 1");
    @(posedge clk_smp); #1 check(sync_out == 0, "synchroniser delay 2");
    // measure 25 periods: period 4 cycles, 2 cycles high
    rises = 0; highs = 0; last_rise = -1;
    repeat (100) begin
      logic prev;
      static int run_hi = 0;
      prev = sync_out;
      @(posedge clk_smp); #1;
      if (sync_out) begin highs++; run_hi++; end
      if (!sync_out && prev) begin
        check(run_hi == 2, $sformatf("high for %0d cycles", run_hi));
        run_hi = 0;
      end
      if (sync_out && !prev) begin
        if (last_rise >= 0) begin
          period = cyc - last_rise;
          check(period == 4, $sformatf("period %0d", period));
        end
        last_rise = cyc;
        rises++;
      end
    end
    check(rises == 25, $sformatf("rises %0d", rises));
    check(highs == 50, $sformatf("high cycles %0d", highs));
    en = 0;
    repeat (4) @(posedge clk_smp);
    #1 check(sync_out == 0, "stops when disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
