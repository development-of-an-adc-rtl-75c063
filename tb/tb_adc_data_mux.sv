// tb_adc_data_mux: drives random LVDS and JESD words and checks that the mux
// forwards the selected source one cycle later and holds otherwise.
module tb_adc_data_mux;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0, src_sel = 0;
  logic lvds_valid = 0, jesd_valid = 0, out_valid;
  logic [NUM_CH-1:0][SAMPLE_W-1:0] lvds_data, jesd_data, out_data, exp_data;
  int checks = 0, failures = 0;

  adc_data_mux dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_valid;
    lvds_data = '0; jesd_data = '0; exp_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      src_sel    = (i >= 200);
      lvds_valid = $urandom_range(0, 1);
      jesd_valid = $urandom_range(0, 1);
      for (int c = 0; c < NUM_CH; c++) begin
        lvds_data[c] = SAMPLE_W'($urandom);
        jesd_data[c] = SAMPLE_W'($urandom);
      end
      exp_valid = src_sel ? jesd_valid : lvds_valid;
      if (exp_valid) exp_data = src_sel ? jesd_data : lvds_data;
      @(posedge clk); #1;
      checks++;
      if (out_valid !== exp_valid || out_data !== exp_data) begin
        failures++;
        $display("FAIL i=%0d sel=%0d valid %0d/%0d", i, src_sel, out_valid, exp_valid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
