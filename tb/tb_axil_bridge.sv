// tb_axil_bridge: AXI4-Lite master tasks against the bridge, with simple
// register-file targets behind it. Checks that writes reach only the target
// selected by address bits [13:12] with the right offset and data, that
// reads return the addressed target's data one cycle after the strobe, that
// unmapped addresses give DECERR, and handshakes under random ready delays.
module tb_axil_bridge;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] s_awaddr, s_wdata, s_araddr, s_rdata;
  logic [3:0] s_wstrb = 4'hF;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic [1:0] s_bresp, s_rresp;
  reg_req_t [NUM_TGT-1:0] req;
  logic [NUM_TGT-1:0][31:0] rdata;
  logic [31:0] regs [NUM_TGT][16];
  int checks = 0, failures = 0, wr_strobes = 0;

  axil_bridge dut (.*);
  always #5 clk = ~clk;

  // targets: 16 registers each, read data registered like the real targets
  for (genvar t = 0; t < NUM_TGT; t++) begin : g_t
    always_ff @(posedge clk) begin
      if (req[t].wr) begin regs[t][req[t].addr[5:2]] <= req[t].wdata; wr_strobes++; end
      if (req[t].rd) rdata[t] <= regs[t][req[t].addr[5:2]] ^ 32'(t);
    end
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic axi_wr(input logic [31:0] a, input logic [31:0] d, output logic [1:0] resp);
    @(negedge clk); s_awaddr = a; s_wdata = d; s_awvalid = 1; s_wvalid = 1;
    do @(posedge clk); while (!s_awready);
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    resp = s_bresp;
    @(negedge clk); s_bready = 0;
  endtask
  task automatic axi_rd(input logic [31:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk); s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    s_rready = 1;
    do @(posedge clk); while (!s_rvalid);
    d = s_rdata; resp = s_rresp;
    @(negedge clk); s_rready = 0;
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] model [NUM_TGT][16];
    logic [1:0] resp;
    logic [31:0] d;
    for (int t = 0; t < NUM_TGT; t++) for (int r = 0; r < 16; r++) begin
      regs[t][r] = '0; model[t][r] = '0;
    end
    rdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      int t, r;
      logic [31:0] v;
      t = $urandom_range(0, NUM_TGT - 1); r = $urandom_range(0, 15); v = $urandom;
      if ($urandom_range(0, 1)) begin
        int n_before;
        n_before = wr_strobes;
        axi_wr({18'd0, 2'(t), 6'd0, 4'(r), 2'b00}, v, resp);
        model[t][r] = v;
        check(resp == 2'b00 && wr_strobes == n_before + 1, "write OKAY, one strobe");
      end else begin
        axi_rd({18'd0, 2'(t), 6'd0, 4'(r), 2'b00}, d, resp);
        check(resp == 2'b00 && d == (model[t][r] ^ 32'(t)), $sformatf("read t%0d r%0d", t, r));
      end
    end
    axi_rd(32'h0000_3000, d, resp);
    check(resp == 2'b11 && d == 32'hDEAD_BEEF, "unmapped read DECERR");
    axi_wr(32'h0000_3004, 32'h1234, resp);
    check(resp == 2'b11, "unmapped write DECERR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
