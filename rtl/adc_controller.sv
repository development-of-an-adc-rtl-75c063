// adc_controller: configures the ADC under test over its serial control port
// and drives its hardware-reset pin.
//
// The ADS52J90 is written over SPI and the AD9249 over uWIRE; the mode bit
// picks the port and the other port stays idle. A write to FRAME starts a
// FRAME_W-bit transfer, MSB first (for both ADCs an 8-bit register address
// followed by 16 data bits). Each bit is put on the data line while the clock
// is low and is held for CLK_DIV cycles on each clock phase; the ADC samples
// it on the rising clock edge. SPI frames the transfer with an active-low
// enable (spi_sen_n), uWIRE with an active-high chip select (uw_cs).
// Writing CTRL bit 1 gives a RESET_CYCLES-long pulse on adc_reset, the
// dedicated pin that recovers the ADC from a SEFI-A.
// Registers: 0x000 FRAME (write starts a transfer), 0x004 CTRL [0] mode
// (0 SPI, 1 uWIRE) [1] reset pulse (self-clearing), 0x008 STATUS [0] busy
// [1] reset active. Writes to FRAME while busy are ignored.
// Timing: a transfer takes (2*FRAME_W + 2)*CLK_DIV cycles from the write.
// The two port types and the reset pin are from the paper; frame length,
// clock rate and edge choices are this design's.
module adc_controller
  import daq_pkg::*;
#(
  parameter int unsigned FRAME_W      = 24,
  parameter int unsigned CLK_DIV      = 8,
  parameter int unsigned RESET_CYCLES = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  reg_req_t    req,
  output logic [31:0] rdata,
  // SPI (ADS52J90)
  output logic        spi_sclk,
  output logic        spi_sdata,
  output logic        spi_sen_n,
  // uWIRE (AD9249)
  output logic        uw_sk,
  output logic        uw_di,
  output logic        uw_cs,
  // hardware reset pin of the ADC
  output logic        adc_reset,
  output logic        busy
);
  typedef enum logic [1:0] {C_IDLE, C_LEAD, C_SHIFT, C_TRAIL} cfg_state_e;
  cfg_state_e st;

  cfg_mode_e                     mode;
  logic [FRAME_W-1:0]            shreg;
  logic [$clog2(FRAME_W+1)-1:0]  bits_left;
  logic [$clog2(CLK_DIV+1)-1:0]  div_cnt;
  logic                          sclk, sdata, sel;
  logic [$clog2(RESET_CYCLES+1)-1:0] rst_cnt;
  logic                          tick;

  assign tick = (div_cnt == ($bits(div_cnt))'(CLK_DIV - 1));
  assign busy = (st != C_IDLE);

  // pin multiplexing between the two serial ports
  assign spi_sclk  = (mode == CFG_SPI)   ? sclk  : 1'b0;
  assign spi_sdata = (mode == CFG_SPI)   ? sdata : 1'b0;
  assign spi_sen_n = (mode == CFG_SPI)   ? !sel  : 1'b1;
  assign uw_sk     = (mode == CFG_UWIRE) ? sclk  : 1'b0;
  assign uw_di     = (mode == CFG_UWIRE) ? sdata : 1'b0;
  assign uw_cs     = (mode == CFG_UWIRE) ? sel   : 1'b0;
  assign adc_reset = (rst_cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= C_IDLE;
      mode      <= CFG_SPI;
      shreg     <= '0;
      bits_left <= '0;
      div_cnt   <= '0;
      sclk      <= 1'b0;
      sdata     <= 1'b0;
      sel       <= 1'b0;
      rst_cnt   <= '0;
      rdata     <= '0;
    end else begin
      // register access
      if (req.rd) begin
        unique case (req.addr)
          A_CTRL:   rdata <= 32'(mode);
          A_STATUS: rdata <= {30'd0, adc_reset, busy};
          default:  rdata <= 32'(shreg);
        endcase
      end
      if (req.wr && req.addr == A_CTRL) begin
        if (!busy) mode <= cfg_mode_e'(req.wdata[0]);
        if (req.wdata[1]) rst_cnt <= ($bits(rst_cnt))'(RESET_CYCLES);
      end else if (rst_cnt != '0) begin
        rst_cnt <= rst_cnt - 1'b1;
      end

      // serial engine
      div_cnt <= (st == C_IDLE || tick) ? '0 : div_cnt + 1'b1;
      unique case (st)
        C_IDLE: begin
          if (req.wr && req.addr == A_FRAME) begin
            shreg     <= req.wdata[FRAME_W-1:0];
            bits_left <= ($bits(bits_left))'(FRAME_W);
            sel       <= 1'b1;
            st        <= C_LEAD;
          end
        end
        C_LEAD: if (tick) begin             // select set-up, first bit out
          sdata <= shreg[FRAME_W-1];
          shreg <= {shreg[FRAME_W-2:0], 1'b0};
          st    <= C_SHIFT;
        end
        C_SHIFT: if (tick) begin
          if (!sclk) begin
            sclk <= 1'b1;                   // ADC samples here
          end else begin
            sclk      <= 1'b0;
            bits_left <= bits_left - 1'b1;
            if (bits_left == ($bits(bits_left))'(1)) begin
              st <= C_TRAIL;
            end else begin
              sdata <= shreg[FRAME_W-1];
              shreg <= {shreg[FRAME_W-2:0], 1'b0};
            end
          end
        end
        C_TRAIL: if (tick) begin
          sel   <= 1'b0;
          sdata <= 1'b0;
          st    <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
