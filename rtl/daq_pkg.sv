// daq_pkg: constants and types shared by the DAQ-board firmware of the ADC
// radiation-tolerance test system.
//
// The channel count (16), the LUT depth (1024 points, one period of the
// 39.0625 kHz test sine sampled at 40 MHz), the capture length (16 thousand
// points, read as 16384) and the 1024-point pre-trigger window are the
// published figures of the test method. The 14-bit sample width, the
// register-bus format and the register map are this design's own choices.
package daq_pkg;

  localparam int unsigned NUM_CH        = 16;
  localparam int unsigned SAMPLE_W      = 14;
  localparam int unsigned LUT_DEPTH     = 1024;
  localparam int unsigned CAPTURE_DEPTH = 16384;
  localparam int unsigned PRE_TRIGGER   = 1024;

  // Each captured sample point is one 32-bit word per channel:
  // [29:16] LUT sample, [13:0] ADC sample, other bits zero.
  localparam int unsigned REC_W_PER_CH  = 32;

  // Local register bus between the AXI bridge and its targets.
  // A read strobe is answered with rdata on the following cycle.
  localparam int unsigned REG_AW = 12;
  typedef struct packed {
    logic              wr;
    logic              rd;
    logic [REG_AW-1:0] addr;
    logic [31:0]       wdata;
  } reg_req_t;

  // Register targets behind the AXI bridge, selected by address bits [13:12].
  typedef enum logic [1:0] {
    TGT_ADC_CTRL = 2'd0,
    TGT_DAQ_REGS = 2'd1,
    TGT_LUT_CTRL = 2'd2
  } reg_target_e;
  localparam int unsigned NUM_TGT = 3;

  // daq_regs offsets
  localparam logic [REG_AW-1:0] R_CTRL      = 12'h000;
  localparam logic [REG_AW-1:0] R_THRESHOLD = 12'h004;
  localparam logic [REG_AW-1:0] R_PHASE     = 12'h008;
  localparam logic [REG_AW-1:0] R_STATUS    = 12'h00C;
  localparam logic [REG_AW-1:0] R_CH_MASK   = 12'h010;
  localparam logic [REG_AW-1:0] R_EVENTS    = 12'h014;
  localparam logic [REG_AW-1:0] R_TRIG_ADDR = 12'h018;
  localparam logic [REG_AW-1:0] R_FLAG_SMP  = 12'h01C;
  localparam logic [REG_AW-1:0] R_OVERFLOW  = 12'h020;
  localparam logic [REG_AW-1:0] R_JESD_ERR  = 12'h024;

  // adc_controller offsets
  localparam logic [REG_AW-1:0] A_FRAME     = 12'h000;
  localparam logic [REG_AW-1:0] A_CTRL      = 12'h004;
  localparam logic [REG_AW-1:0] A_STATUS    = 12'h008;

  // lut_write_ctrl offsets
  localparam logic [REG_AW-1:0] L_PTR       = 12'h000;
  localparam logic [REG_AW-1:0] L_DATA      = 12'h004;

  // Serial configuration modes of the ADC controller.
  typedef enum logic {
    CFG_SPI   = 1'b0,   // ADS52J90
    CFG_UWIRE = 1'b1    // AD9249
  } cfg_mode_e;

  // JESD204B control characters (8b/10b K codes, decoded octet value)
  localparam logic [7:0] K28_0 = 8'h1C;  // /R/ start of multiframe (ILAS)
  localparam logic [7:0] K28_3 = 8'h7C;  // /A/ lane alignment
  localparam logic [7:0] K28_4 = 8'h9C;  // /Q/ start of link configuration data
  localparam logic [7:0] K28_5 = 8'hBC;  // /K/ code-group synchronisation
  localparam logic [7:0] K28_7 = 8'hFC;  // /F/ frame alignment

endpackage
