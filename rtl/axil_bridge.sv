// axil_bridge: the AXI4 register port through which the processing system
// reaches the fabric blocks. The host's commands arrive over Ethernet, are
// decoded by the processor, and become AXI4-Lite single-beat accesses here.
//
// Address bits [13:12] select the target (0 ADC controller, 1 checker and
// capture registers, 2 LUT controller) and bits [11:0] are the offset passed
// on the local register bus. A write needs both AW and W; it is issued as a
// one-cycle wr strobe and answered with OKAY. A read is issued as a one-cycle
// rd strobe; the target's rdata is taken on the next cycle and returned on R.
// Accesses to an unmapped target return DECERR (read data 0xDEAD_BEEF).
// One transaction at a time; reads win over writes when both are pending.
// Timing: write response two cycles after AW/W acceptance, read data three
// cycles after AR acceptance. AXI4-Lite, the map and the timing are this
// design's choices; the paper states only that commands reach the modules
// over the AXI4 bus.
module axil_bridge
  import daq_pkg::*;
#(
  parameter int unsigned ADDR_W = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [ADDR_W-1:0]           s_awaddr,
  input  logic                        s_awvalid,
  output logic                        s_awready,
  input  logic [31:0]                 s_wdata,
  input  logic [3:0]                  s_wstrb,
  input  logic                        s_wvalid,
  output logic                        s_wready,
  output logic [1:0]                  s_bresp,
  output logic                        s_bvalid,
  input  logic                        s_bready,
  input  logic [ADDR_W-1:0]           s_araddr,
  input  logic                        s_arvalid,
  output logic                        s_arready,
  output logic [31:0]                 s_rdata,
  output logic [1:0]                  s_rresp,
  output logic                        s_rvalid,
  input  logic                        s_rready,
  output reg_req_t [NUM_TGT-1:0]      req,
  input  logic [NUM_TGT-1:0][31:0]    rdata
);
  typedef enum logic [2:0] {X_IDLE, X_WR, X_BRESP, X_RD, X_RWAIT, X_RRESP} xfer_state_e;
  xfer_state_e st;

  logic [ADDR_W-1:0] addr;
  logic [31:0]       wdata;
  logic [1:0]        tgt;
  logic              tgt_ok;

  assign tgt    = addr[13:12];
  assign tgt_ok = (tgt < 2'(NUM_TGT));

  assign s_arready = (st == X_IDLE);
  assign s_awready = (st == X_IDLE) && !s_arvalid && s_awvalid && s_wvalid;
  assign s_wready  = s_awready;
  assign s_bvalid  = (st == X_BRESP);
  assign s_rvalid  = (st == X_RRESP);

  always_comb begin
    for (int t = 0; t < NUM_TGT; t++) begin
      req[t].wr    = (st == X_WR) && tgt == 2'(t);
      req[t].rd    = (st == X_RD) && tgt == 2'(t);
      req[t].addr  = addr[REG_AW-1:0];
      req[t].wdata = wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= X_IDLE;
      addr    <= '0;
      wdata   <= '0;
      s_bresp <= 2'b00;
      s_rresp <= 2'b00;
      s_rdata <= '0;
    end else begin
      unique case (st)
        X_IDLE: begin
          if (s_arvalid) begin
            addr <= s_araddr;
            st   <= X_RD;
          end else if (s_awvalid && s_wvalid) begin
            addr  <= s_awaddr;
            wdata <= s_wdata;
            st    <= X_WR;
          end
        end
        X_WR: begin
          s_bresp <= tgt_ok ? 2'b00 : 2'b11;
          st      <= X_BRESP;
        end
        X_BRESP: if (s_bready) st <= X_IDLE;
        X_RD:    st <= X_RWAIT;
        X_RWAIT: begin
          s_rdata <= tgt_ok ? rdata[tgt] : 32'hDEAD_BEEF;
          s_rresp <= tgt_ok ? 2'b00 : 2'b11;
          st      <= X_RRESP;
        end
        X_RRESP: if (s_rready) st <= X_IDLE;
        default: st <= X_IDLE;
      endcase
    end
  end

  // AXI rule: a response stays valid with stable payload until taken.
  assert property (@(posedge clk) disable iff (!rst_n) s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
  assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid && $stable(s_bresp));
endmodule
