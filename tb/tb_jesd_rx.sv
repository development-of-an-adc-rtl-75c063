// tb_jesd_rx: connects the JESD204B receiver to the behavioural transmitter
// and checks code-group synchronisation (sync_n low until /K/ is seen, high
// after), that the link comes up only after the 4-multiframe ILAS, that every
// sample on every lane arrives in order with one sample per two octets, and
// that replaced /F/ and /A/ characters are restored. Samples repeat often so
// that replacement happens. Finally a stray K character on one lane must
// drop the link back to synchronisation and count a link error.
module tb_jesd_rx;
  localparam int NL = 16, K = 4;
  logic clk = 0, rst_n = 0, en = 0;
  logic sync_n, link_up, out_valid, sample_req, tx_valid;
  logic [NL-1:0][7:0]  tx_octet, rx_octet;
  logic [NL-1:0]       tx_is_k, rx_is_k;
  logic [NL-1:0][13:0] samples, out_data;
  logic [15:0] align_err, link_err;
  int n_repl, checks = 0, failures = 0, n_out = 0, n_req = 0, last_out = -1, cyc = 0;
  logic [NL-1:0][13:0] sent [$];
  bit inject = 0;

  jesd_tx_model #(.NUM_LANES(NL), .K_MF(K)) u_tx (
    .clk, .rst_n, .en, .sync_n, .samples, .sample_req,
    .out_valid(tx_valid), .out_octet(tx_octet), .out_is_k(tx_is_k), .n_repl);

  always_comb begin
    rx_octet = tx_octet;
    rx_is_k  = tx_is_k;
    if (inject) begin rx_octet[3] = 8'hBC; rx_is_k[3] = 1'b1; end
  end

  jesd_rx #(.NUM_LANES(NL), .SAMPLE_W(14), .K_MF(K)) dut (
    .clk, .rst_n, .in_valid(tx_valid), .in_octet(rx_octet), .in_is_k(rx_is_k),
    .sync_n, .link_up, .out_valid, .out_data, .align_err, .link_err);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

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

  // new samples: slowly varying so neighbouring frames often repeat octets
  always @(posedge clk) if (sample_req) begin
    sent.push_back(samples);
    n_req++;
    for (int l = 0; l < NL; l++) samples[l] <= 14'(((n_req / 3) * (l + 1) * 64) + ($urandom_range(0, 1) ? 0 : 0));
  end

  always @(posedge clk) if (rst_n && out_valid && !inject) begin
    logic [NL-1:0][13:0] e;
    e = sent.pop_front();
    check(out_data == e, $sformatf("sample %0d", n_out));
    if (last_out >= 0) check(cyc - last_out == 2, "one sample per 2 octets");
    last_out = cyc;
    n_out++;
  end

  initial begin
    int t_link;
    samples = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(sync_n == 0, "sync_n low before CGS");
    en = 1;
    repeat (8) @(posedge clk);
    #1 check(sync_n == 1, "sync_n high after /K/");
    check(link_up == 0, "link down during ILAS");
    t_link = 0;
    while (!link_up && t_link < 1000) begin @(posedge clk); t_link++; end
    check(t_link > 8 * K - 4 && t_link < 8 * K + 8, $sformatf("ILAS length %0d cycles", t_link));
    repeat (600) @(posedge clk);
    check(n_out > 280, $sformatf("samples out %0d", n_out));
    check(n_repl > 10, $sformatf("replacements %0d", n_repl));
    check(align_err == 0 && link_err == 0, "no errors");
    // stray /K/ on lane 3
    @(negedge clk); inject = 1;
    @(negedge clk); inject = 0;
    #1 check(link_err == 1, $sformatf("link error counted (%0d)", link_err));
    check(sync_n == 0, "sync_n low after error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
