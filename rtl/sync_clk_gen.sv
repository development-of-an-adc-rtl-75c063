// sync_clk_gen: generates the SYNC clock that locks the signal generator to
// the FPGA time base. The paper's system sends a 10 MHz SYNC clock to the
// generator while the ADC samples at 40 MHz; here the 40 MHz sampling clock is
// divided by DIV (default 4) to a 50 %-duty square wave. The enable comes from
// the register clock domain and is passed through a two-flop synchroniser.
// Timing: sync_out changes on rising clk_smp edges only; with en high it is
// high for DIV/2 cycles and low for DIV/2 cycles. The divider and the
// synchroniser are this design's choices; the frequencies are the paper's.
module sync_clk_gen #(
  parameter int unsigned DIV = 4   // 40 MHz / 10 MHz
) (
  input  logic clk_smp,
  input  logic rst_n,
  input  logic en,          // asynchronous to clk_smp
  output logic sync_out
);
  localparam int unsigned CW = (DIV > 2) ? $clog2(DIV) : 1;
  logic [1:0]    en_sync;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk_smp or negedge rst_n) begin
    if (!rst_n) begin
      en_sync  <= '0;
      cnt      <= '0;
      sync_out <= 1'b0;
    end else begin
      en_sync <= {en_sync[0], en};
      if (!en_sync[1]) begin
        cnt      <= '0;
        sync_out <= 1'b0;
      end else begin
        cnt      <= (cnt == CW'(DIV-1)) ? '0 : cnt + 1'b1;
        sync_out <= (cnt < CW'(DIV/2));
      end
    end
  end

  initial assert (DIV >= 2 && DIV % 2 == 0) else $error("DIV must be even and >= 2");
endmodule
