// tb_lvds_rx: serialises random 14-bit words on 16 lanes, MSB first, with the
// frame clock high for the first half of each word, and checks every word
// comes out whole, in order, on all lanes, with one word every 14 bit
// periods. Also checks that bits sent before the first frame edge are
// dropped and that bit_en gaps are tolerated.
module tb_lvds_rx;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0, bit_en = 0, fco = 0, out_valid, locked;
  logic [NUM_CH-1:0] din = '0;
  logic [NUM_CH-1:0][SAMPLE_W-1:0] out_data;
  logic [NUM_CH-1:0][SAMPLE_W-1:0] sent [$];
  int checks = 0, failures = 0, words_out = 0, last_out = -1, cyc = 0;

  lvds_rx dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (sent.size() == 0) begin
      failures++; $display("FAIL unexpected word");
    end else begin
      logic [NUM_CH-1:0][SAMPLE_W-1:0] e;
      e = sent.pop_front();
      if (out_data !== e) begin failures++; $display("FAIL word %0d mismatch", words_out); end
    end
    if (last_out >= 0 && words_out < 100) begin
      checks++;
      if (cyc - last_out != SAMPLE_W) begin failures++; $display("FAIL rate %0d", cyc - last_out); end
    end
    last_out = cyc;
    words_out++;
  end

  task automatic send_word(input logic [NUM_CH-1:0][SAMPLE_W-1:0] w, input bit gaps, input bit record);
    if (record) sent.push_back(w);
    for (int b = SAMPLE_W - 1; b >= 0; b--) begin
      @(negedge clk);
      bit_en = 1;
      fco    = (b >= SAMPLE_W / 2);
      for (int c = 0; c < NUM_CH; c++) din[c] = w[c][b];
      if (gaps && $urandom_range(0, 3) == 0) begin
        @(negedge clk);
        bit_en = 0;
        din    = NUM_CH'($urandom);
      end
    end
  endtask

  initial begin
    logic [NUM_CH-1:0][SAMPLE_W-1:0] w;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // a partial word before the first frame edge: 5 stray bits, fco low
    for (int b = 0; b < 5; b++) begin
      @(negedge clk); bit_en = 1; fco = 0; din = NUM_CH'($urandom);
    end
    for (int i = 0; i < 200; i++) begin
      for (int c = 0; c < NUM_CH; c++) w[c] = SAMPLE_W'($urandom);
      send_word(w, i >= 100, 1'b1);
    end
    @(negedge clk); bit_en = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (words_out != 200 || sent.size() != 0 || !locked) begin
      failures++; $display("FAIL words_out=%0d left=%0d locked=%0d", words_out, sent.size(), locked);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
