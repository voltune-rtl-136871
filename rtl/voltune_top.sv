// voltune_top - hardware VolTune subsystem for one FPGA (KC705 prototype).
//
// Puts together the four on-chip blocks of the hardware control path, all in
// one clock domain (100 MHz on the prototype):
//
//   AXI4-Lite (host) -> voltage_test_manager --cmd--> power_manager
//                            ^               <--ack--      |  ^
//                            |                          req|  |rsp
//                       axis_counter                       v  |
//                                                 axis_pmbus_wrapper -> SCL/SDA
//
// The Voltage Test Manager holds the registers and runs measurement
// sequences; it sends VolTune opcodes to the PowerManager and time-stamps
// readback samples with the counter. The PowerManager turns opcodes into PMBus
// transactions for the PMBus module, which drives the external regulator
// (a UCD9248 on the KC705).
//
// Off-chip and vendor parts are not included and appear as ports: the AXI4-Lite
// slave port is where a JTAG-to-AXI bridge (or any AXI master) connects, and
// the PMBus pins are open-drain pairs: *_drive_low = 1 must pull the line low
// through an open-drain or tri-state pad, scl_i/sda_i return the line levels.
//
// The block structure and the stream command/ack and request/ack paths follow
// the paper's hardware block diagram; signal names, widths and the status
// outputs are this design's. Parameters default to the prototype: 100 MHz
// clock, 400 kHz PMBus, LINEAR16 exponent -12, 256-sample buffer.
//
// s_axi_bresp and s_axi_rresp are always OKAY (see the test manager).
module voltune_top
  import voltune_pkg::*;
#(
  parameter int unsigned CLK_HZ       = 100_000_000,
  parameter int unsigned SCL_HZ       = 400_000,
  parameter int          VOUT_EXP     = -12,
  parameter int unsigned DEPTH        = 256,
  parameter int unsigned WAIT_DEFAULT = 10_000,
  parameter int unsigned ADDR_W       = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave (from the JTAG-to-AXI bridge)
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  // PMBus (open-drain)
  output logic              pmbus_scl_drive_low,
  output logic              pmbus_sda_drive_low,
  input  logic              pmbus_scl_i,
  input  logic              pmbus_sda_i,
  // status
  output logic              test_busy,
  output logic              test_done,
  output logic [2:0]        pm_err_flags,
  output logic              pmbus_busy
);

  // counter
  logic        ts_tvalid;
  logic [31:0] ts_tdata;
  axis_counter #(.WIDTH(32)) u_counter (
    .clk, .rst_n, .en(1'b1), .clr(1'b0), .m_axis_tvalid(ts_tvalid), .m_axis_tdata(ts_tdata));

  // test manager <-> power manager
  logic    cmd_valid, cmd_ready, ack_valid, ack_ready;
  vt_cmd_t cmd_data;
  vt_ack_t ack_data;

  voltage_test_manager #(
    .DEPTH(DEPTH), .WAIT_DEFAULT(WAIT_DEFAULT), .ADDR_W(ADDR_W), .TS_W(32)
  ) u_test_manager (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wstrb,
    .s_axi_wvalid, .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready, .s_axi_rdata, .s_axi_rresp,
    .s_axi_rvalid, .s_axi_rready,
    .ts_tvalid, .ts_tdata,
    .cmd_valid, .cmd_ready, .cmd_data, .ack_valid, .ack_ready, .ack_data,
    .busy(test_busy), .done(test_done));

  // power manager <-> PMBus module
  logic       req_valid, req_ready, rsp_valid, rsp_ready;
  pmbus_req_t req_data;
  pmbus_rsp_t rsp_data;
  logic       lane_selected;
  logic [3:0] cur_lane;

  power_manager #(.VOUT_EXP(VOUT_EXP)) u_power_manager (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_data, .ack_valid, .ack_ready, .ack_data,
    .pmb_req_valid(req_valid), .pmb_req_ready(req_ready), .pmb_req_data(req_data),
    .pmb_rsp_valid(rsp_valid), .pmb_rsp_ready(rsp_ready), .pmb_rsp_data(rsp_data),
    .err_flags(pm_err_flags), .lane_selected, .cur_lane);

  axis_pmbus_wrapper #(.CLK_HZ(CLK_HZ), .SCL_HZ(SCL_HZ)) u_pmbus (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_data, .rsp_valid, .rsp_ready, .rsp_data,
    .scl_drive_low(pmbus_scl_drive_low), .sda_drive_low(pmbus_sda_drive_low),
    .scl_i(pmbus_scl_i), .sda_i(pmbus_sda_i), .busy(pmbus_busy));

  logic unused;
  assign unused = ^{lane_selected, cur_lane};

endmodule
