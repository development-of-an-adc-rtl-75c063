// tb_seu_checker: feeds ADC/LUT pairs (LUT one cycle after ADC, as from the
// block RAM) and checks, against an independent model, that an event is
// flagged exactly when some |ADC-LUT| > threshold, that a difference equal to
// the threshold is not an event, that only the first event per arm triggers,
// the channel mask, the flagged sample index, the event counter, the
// pass-through of the data, and that arm clears the flag.
module tb_seu_checker;
  import daq_pkg::*;
  localparam int NC = 16, W = 14;
  logic clk = 0, rst_n = 0, arm = 0, enable = 0;
  logic [W-1:0] threshold;
  logic adc_valid = 0, lut_valid = 0, out_valid, trig, see_flag;
  logic [NC-1:0][W-1:0] adc_data, lut_data, out_adc, out_lut;
  logic [NC-1:0] ch_mask;
  logic [31:0] flag_sample, event_count;
  int checks = 0, failures = 0;

  seu_checker #(.NUM_CH(NC), .SAMPLE_W(W)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one sample point: mode 0 = all within threshold, 1 = some channels above,
  // 2 = one channel exactly at threshold
  task automatic point(input int mode, input int idx, input bit exp_first,
                       inout int exp_events, input bit armed_flag);
    logic [NC-1:0][W-1:0] a, l;
    logic [NC-1:0] exp_over;
    exp_over = '0;
    for (int c = 0; c < NC; c++) begin
      int d;
      l[c] = W'($urandom_range(2000, 14000));
      d = $urandom_range(0, threshold);
      if (mode == 1 && ($urandom_range(0, 3) == 0 || c == idx % NC)) begin
        d = threshold + 1 + $urandom_range(0, 300);
        exp_over[c] = 1'b1;
      end
      if (mode == 2 && c == 7) d = threshold;
      a[c] = $urandom_range(0, 1) ? l[c] + W'(d) : l[c] - W'(d);
    end
    @(negedge clk); adc_valid = 1; adc_data = a;
    @(negedge clk); adc_valid = 0; adc_data = '0; lut_valid = 1; lut_data = l;
    @(negedge clk); lut_valid = 0;
    check(out_valid && out_adc == a && out_lut == l, "pass-through");
    check(trig == (exp_first && |exp_over), $sformatf("trig at point %0d mode %0d", idx, mode));
    if (exp_first && |exp_over) begin
      exp_events++;
      check(ch_mask == exp_over, "channel mask");
      check(flag_sample == 32'(idx), $sformatf("flag sample %0d vs %0d", flag_sample, idx));
    end
    check(see_flag == (armed_flag || |exp_over), "sticky flag");
    check(event_count == 32'(exp_events), "event count");
  endtask

  initial begin
    int ev;
    bit flagged;
    threshold = 14'd200;
    adc_data = '0; lut_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    ev = 0;
    for (int round = 0; round < 4; round++) begin
      int trig_at;
      threshold = 14'(50 + round * 300);
      @(negedge clk); arm = 1; enable = 1;
      @(negedge clk); arm = 0;
      check(see_flag == 0, "arm clears the flag");
      trig_at = 20 + round * 7;
      flagged = 0;
      for (int i = 0; i < 60; i++) begin
        int mode;
        mode = (i == trig_at || (i > trig_at && $urandom_range(0, 4) == 0)) ? 1 :
               (i % 5 == 2) ? 2 : 0;
        point(mode, i, !flagged, ev, flagged);
        if (mode == 1) flagged = 1;
      end
    end
    // disabled: no output, no event
    @(negedge clk); enable = 0;
    @(negedge clk); adc_valid = 1; adc_data = '1;
    @(negedge clk); adc_valid = 0; lut_valid = 1; lut_data = '0;
    @(negedge clk); lut_valid = 0;
    check(!out_valid && !trig, "disabled checker is silent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
