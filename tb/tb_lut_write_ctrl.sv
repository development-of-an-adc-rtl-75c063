// tb_lut_write_ctrl: drives the LUT write controller over the register bus
// with a real lut_ram behind it. Loads two whole channels with one pointer
// write plus a stream of data writes (auto-increment across the channel
// boundary), reads them back through the DATA register, and checks the
// pointer register and the replay of the loaded table.
module tb_lut_write_ctrl;
  import daq_pkg::*;
  localparam int NC = 4, D = 32, W = 14;
  logic clk = 0, rst_n = 0;
  reg_req_t req;
  logic [31:0] rdata;
  logic lut_we, lut_re, a_valid;
  logic [$clog2(NC)-1:0] lut_ch;
  logic [$clog2(D)-1:0] lut_idx;
  logic [W-1:0] lut_wdata, lut_rdata;
  logic [NC-1:0][W-1:0] a_data;
  logic adv = 0;
  int checks = 0, failures = 0;

  lut_write_ctrl #(.NUM_CH(NC), .DEPTH(D), .SAMPLE_W(W)) dut (.*);
  lut_ram #(.NUM_CH(NC), .DEPTH(D), .SAMPLE_W(W)) u_lut (
    .clk, .rst_n, .restart(1'b0), .adv, .phase('0), .a_valid, .a_data,
    .b_we(lut_we), .b_re(lut_re), .b_ch(lut_ch), .b_idx(lut_idx), .b_wdata(lut_wdata), .b_rdata(lut_rdata));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); req = '{wr: 1'b1, rd: 1'b0, addr: a, wdata: d};
    @(negedge clk); req = '0;
  endtask
  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk); req = '{wr: 1'b0, rd: 1'b1, addr: a, wdata: 32'd0};
    @(negedge clk); req = '0; d = rdata;
  endtask
  function automatic logic [W-1:0] pat(int c, int i);
    return W'(c * 1234 + i * 77 + 3);
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr(L_PTR, 32'h0001_0000);            // channel 1, index 0
    for (int c = 1; c <= 2; c++)
      for (int i = 0; i < D; i++) wr(L_DATA, 32'(pat(c, i)));
    rd(L_PTR, d);
    check(d == 32'h0003_0000, $sformatf("pointer after 2 channels: %h", d));
    wr(L_PTR, 32'h0001_0000);
    for (int c = 1; c <= 2; c++)
      for (int i = 0; i < D; i++) begin
        rd(L_DATA, d);
        check(d == 32'(pat(c, i)), $sformatf("read-back ch%0d idx%0d: %h", c, i, d));
      end
    wr(L_PTR, 32'h0000_0005);             // channel 0, index 5: single write
    wr(L_DATA, 32'h1ABC);
    wr(L_PTR, 32'h0000_0005);
    rd(L_DATA, d);
    check(d == 32'h1ABC, "single write");
    // replay through the checker port
    for (int n = 0; n < D; n++) begin
      @(negedge clk); adv = 1;
      @(negedge clk); adv = 0;
      check(a_data[1] == pat(1, n) && a_data[2] == pat(2, n), $sformatf("replay %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
