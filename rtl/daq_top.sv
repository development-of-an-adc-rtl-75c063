// daq_top: programmable-logic firmware of the DAQ board of the ADC
// radiation-tolerance test system.
//
// Data path: the ADC's 16 channels arrive either as 16 serial LVDS lanes
// (lvds_rx) or as 16 JESD204B lanes already decoded to octets by the FPGA
// transceivers (jesd_rx). adc_data_mux picks one source. Each sample point
// advances the reference LUT (lut_ram), which replays the host-computed
// average waveform with a host-set phase; seu_checker compares ADC and LUT
// channel by channel against the threshold and flags an SEE event;
// see_capture streams ADC and LUT data into a DDR3 ring buffer over an AXI4
// write master and, after an event, freezes 1024 points before it and the
// rest of the 16384-point window after it. A host snapshot freezes a window
// the same way without an event (periodic TID recordings, LUT calculation).
// Control path: the processing system's AXI4-Lite master reaches, through
// axil_bridge, the ADC controller (SPI/uWIRE configuration and reset pin of
// the ADC), the LUT write controller and the test registers (daq_regs).
// sync_clk_gen makes the 10 MHz SYNC clock for the signal generator from
// the 40 MHz sampling clock.
// The block set and its wiring follow the firmware block diagram of the
// paper. All fabric logic except the SYNC divider runs on clk; the ADC data
// interfaces deliver their words with valid strobes in that domain, which is
// this design's simplification of the real bit-clock and transceiver-clock
// domains. The processor, its DDR3 controller and the transceivers are
// outside this module: their signals are ports.
module daq_top
  import daq_pkg::*;
#(
  parameter int unsigned NUM_CH        = daq_pkg::NUM_CH,
  parameter int unsigned SAMPLE_W      = daq_pkg::SAMPLE_W,
  parameter int unsigned LUT_DEPTH     = daq_pkg::LUT_DEPTH,
  parameter int unsigned CAPTURE_DEPTH = daq_pkg::CAPTURE_DEPTH,
  parameter int unsigned PRE_TRIGGER   = daq_pkg::PRE_TRIGGER,
  parameter int unsigned JESD_K        = 32,
  parameter logic [31:0] CAPTURE_BASE  = 32'h1000_0000
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clk_smp,      // 40 MHz sampling clock
  // LVDS ADC data
  input  logic                        lvds_bit_en,
  input  logic                        lvds_fco,
  input  logic [NUM_CH-1:0]           lvds_din,
  // JESD204B lanes, decoded by the transceivers
  input  logic                        jesd_valid,
  input  logic [NUM_CH-1:0][7:0]      jesd_octet,
  input  logic [NUM_CH-1:0]           jesd_is_k,
  output logic                        jesd_sync_n,
  // AXI4-Lite slave from the processing system
  input  logic [31:0]                 s_awaddr,
  input  logic                        s_awvalid,
  output logic                        s_awready,
  input  logic [31:0]                 s_wdata,
  input  logic [3:0]                  s_wstrb,
  input  logic                        s_wvalid,
  output logic                        s_wready,
  output logic [1:0]                  s_bresp,
  output logic                        s_bvalid,
  input  logic                        s_bready,
  input  logic [31:0]                 s_araddr,
  input  logic                        s_arvalid,
  output logic                        s_arready,
  output logic [31:0]                 s_rdata,
  output logic [1:0]                  s_rresp,
  output logic                        s_rvalid,
  input  logic                        s_rready,
  // AXI4 write master to DDR3 through the processing system
  output logic [31:0]                 m_awaddr,
  output logic [7:0]                  m_awlen,
  output logic [2:0]                  m_awsize,
  output logic [1:0]                  m_awburst,
  output logic                        m_awvalid,
  input  logic                        m_awready,
  output logic [NUM_CH*32-1:0]        m_wdata,
  output logic [NUM_CH*4-1:0]         m_wstrb,
  output logic                        m_wlast,
  output logic                        m_wvalid,
  input  logic                        m_wready,
  input  logic [1:0]                  m_bresp,
  input  logic                        m_bvalid,
  output logic                        m_bready,
  // ADC configuration signals
  output logic                        spi_sclk,
  output logic                        spi_sdata,
  output logic                        spi_sen_n,
  output logic                        uw_sk,
  output logic                        uw_di,
  output logic                        uw_cs,
  output logic                        adc_reset,
  // SYNC clock to the signal generator, SEE interrupt to the processor
  output logic                        sync_clk,
  output logic                        see_irq
);
  localparam int unsigned PW = $clog2(LUT_DEPTH);

  reg_req_t [NUM_TGT-1:0]   req;
  logic [NUM_TGT-1:0][31:0] rdata;

  logic                            lvds_valid, lvds_locked;
  logic [NUM_CH-1:0][SAMPLE_W-1:0] lvds_data;
  logic                            jrx_valid, jesd_link_up;
  logic [NUM_CH-1:0][SAMPLE_W-1:0] jrx_data;
  logic [15:0]                     jesd_align_err, jesd_link_err;
  logic                            adc_valid;
  logic [NUM_CH-1:0][SAMPLE_W-1:0] adc_data;
  logic                            lut_valid;
  logic [NUM_CH-1:0][SAMPLE_W-1:0] lut_data;
  logic                            chk_valid, trig, see_flag;
  logic [NUM_CH-1:0][SAMPLE_W-1:0] chk_adc, chk_lut;
  logic [NUM_CH-1:0]               ch_mask;
  logic [31:0]                     flag_sample, event_count, trig_addr;
  logic                            cap_running, cap_triggered, cap_done, cap_err;
  logic [15:0]                     cap_overflow;
  logic                            arm, snapshot, enable, src_sel, sync_en;
  logic [SAMPLE_W-1:0]             threshold;
  logic [PW-1:0]                   phase;
  logic                            lut_we, lut_re;
  logic [$clog2(NUM_CH)-1:0]       lut_ch;
  logic [PW-1:0]                   lut_idx;
  logic [SAMPLE_W-1:0]             lut_wdata, lut_rdata;
  logic                            cfg_busy;

  axil_bridge u_bus (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .req, .rdata
  );

  adc_controller u_adc_ctrl (
    .clk, .rst_n, .req(req[TGT_ADC_CTRL]), .rdata(rdata[TGT_ADC_CTRL]),
    .spi_sclk, .spi_sdata, .spi_sen_n, .uw_sk, .uw_di, .uw_cs, .adc_reset,
    .busy(cfg_busy)
  );

  daq_regs #(.NUM_CH(NUM_CH), .SAMPLE_W(SAMPLE_W), .PHASE_W(PW)) u_regs (
    .clk, .rst_n, .req(req[TGT_DAQ_REGS]), .rdata(rdata[TGT_DAQ_REGS]),
    .arm, .snapshot, .enable, .src_sel, .sync_en, .threshold, .phase,
    .see_flag, .cap_done, .cap_running, .jesd_link_up, .lvds_locked, .cap_err,
    .ch_mask, .event_count, .trig_addr, .flag_sample, .overflow(cap_overflow),
    .jesd_align_err, .jesd_link_err
  );

  lut_write_ctrl #(.NUM_CH(NUM_CH), .DEPTH(LUT_DEPTH), .SAMPLE_W(SAMPLE_W)) u_lut_ctrl (
    .clk, .rst_n, .req(req[TGT_LUT_CTRL]), .rdata(rdata[TGT_LUT_CTRL]),
    .lut_we, .lut_re, .lut_ch, .lut_idx, .lut_wdata, .lut_rdata
  );

  lvds_rx #(.NUM_CH(NUM_CH), .SAMPLE_W(SAMPLE_W)) u_lvds (
    .clk, .rst_n, .bit_en(lvds_bit_en), .fco(lvds_fco), .din(lvds_din),
    .out_valid(lvds_valid), .out_data(lvds_data), .locked(lvds_locked)
  );

  jesd_rx #(.NUM_LANES(NUM_CH), .SAMPLE_W(SAMPLE_W), .K_MF(JESD_K)) u_jesd (
    .clk, .rst_n, .in_valid(jesd_valid), .in_octet(jesd_octet), .in_is_k(jesd_is_k),
    .sync_n(jesd_sync_n), .link_up(jesd_link_up),
    .out_valid(jrx_valid), .out_data(jrx_data),
    .align_err(jesd_align_err), .link_err(jesd_link_err)
  );

  adc_data_mux #(.NUM_CH(NUM_CH), .SAMPLE_W(SAMPLE_W)) u_mux (
    .clk, .rst_n, .src_sel,
    .lvds_valid, .lvds_data, .jesd_valid(jrx_valid), .jesd_data(jrx_data),
    .out_valid(adc_valid), .out_data(adc_data)
  );

  lut_ram #(.NUM_CH(NUM_CH), .DEPTH(LUT_DEPTH), .SAMPLE_W(SAMPLE_W)) u_lut (
    .clk, .rst_n,
    .restart(arm), .adv(adc_valid && enable), .phase,
    .a_valid(lut_valid), .a_data(lut_data),
    .b_we(lut_we), .b_re(lut_re), .b_ch(lut_ch), .b_idx(lut_idx),
    .b_wdata(lut_wdata), .b_rdata(lut_rdata)
  );

  seu_checker #(.NUM_CH(NUM_CH), .SAMPLE_W(SAMPLE_W)) u_chk (
    .clk, .rst_n, .arm, .enable, .threshold,
    .adc_valid, .adc_data, .lut_valid, .lut_data,
    .out_valid(chk_valid), .out_adc(chk_adc), .out_lut(chk_lut),
    .trig, .see_flag, .ch_mask, .flag_sample, .event_count
  );

  see_capture #(.NUM_CH(NUM_CH), .SAMPLE_W(SAMPLE_W), .DEPTH(CAPTURE_DEPTH),
                .PRE(PRE_TRIGGER), .BASE_ADDR(CAPTURE_BASE)) u_cap (
    .clk, .rst_n, .arm,
    .in_valid(chk_valid), .in_adc(chk_adc), .in_lut(chk_lut), .trig, .snapshot,
    .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awvalid, .m_awready,
    .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready,
    .m_bresp, .m_bvalid, .m_bready,
    .running(cap_running), .triggered(cap_triggered), .done(cap_done),
    .trig_addr, .overflow(cap_overflow), .bresp_err(cap_err)
  );

  sync_clk_gen #(.DIV(4)) u_sync (
    .clk_smp, .rst_n, .en(sync_en), .sync_out(sync_clk)
  );

  assign see_irq = see_flag;
endmodule
