// tb_axis_pmbus_wrapper - self-checking test of the PMBus transaction engine.
//
// The engine talks to the UCD9248 behavioural model over a wired-AND SCL/SDA
// pair. The test runs every transaction type and compares what the model
// recorded (address, command, data) and what the engine returned with values
// worked out here. It also checks an address NACK, a command NACK, clock
// stretching, and the exact duration of a Write Word and a Read Word at
// 100 MHz / 400 kHz (4 x 62 cycles per bit: 38 and 48 bit times).
`timescale 1ns/1ps
module tb_axis_pmbus_wrapper;
  import voltune_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       req_valid, req_ready, rsp_valid, rsp_ready, busy;
  pmbus_req_t req_data;
  pmbus_rsp_t rsp_data;
  logic m_scl_low, m_sda_low, s_scl_low, s_sda_low, stretch_en;
  wire  scl = !(m_scl_low || s_scl_low);
  wire  sda = !(m_sda_low || s_sda_low);

  axis_pmbus_wrapper dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_data, .rsp_valid, .rsp_ready, .rsp_data,
    .scl_drive_low(m_scl_low), .sda_drive_low(m_sda_low), .scl_i(scl), .sda_i(sda), .busy);

  ucd9248_model model (
    .clk, .rst_n, .scl, .sda, .scl_drive_low(s_scl_low), .sda_drive_low(s_sda_low), .stretch_en);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Issue one transaction, return the response and its latency in cycles.
  task automatic xfer(input pmbus_xfer_e x, input logic [6:0] a, input logic [7:0] c,
                      input logic [15:0] d, output pmbus_rsp_t r, output int cyc);
    @(posedge clk);
    req_data  <= '{xfer: x, addr: a, cmd: c, data: d};
    req_valid <= 1'b1;
    do @(posedge clk); while (!req_ready);
    req_valid <= 1'b0;
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!rsp_valid);
    r = rsp_data;
    rsp_ready <= 1'b1;
    @(posedge clk);
    rsp_ready <= 1'b0;
  endtask

  initial begin : watchdog
    repeat (400_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pmbus_rsp_t r;
    int cyc, n0;
    req_valid = 1'b0; rsp_ready = 1'b0; req_data = '0; stretch_en = 1'b0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);
    check(req_ready && !busy && scl && sda, "idle bus after reset");

    // Write Byte: PAGE = 2 on device 53
    n0 = model.log_n;
    xfer(XFER_WRITE_BYTE, 7'd53, PMB_PAGE, 16'h0002, r, cyc);
    check(r.status == PMB_OK, "write byte status");
    check(model.log_n == n0 + 1 && model.log_addr[n0] == 7'd53 && model.log_cmd[n0] == 8'h00
          && model.log_data[n0] == 16'h0002 && !model.log_rd[n0], "write byte seen by device");
    check(model.page[1] == 2'd2, "device page updated");

    // Write Word: VOUT_COMMAND = 0x0E66 (0.9 V), timed
    n0 = model.log_n;
    xfer(XFER_WRITE_WORD, 7'd53, PMB_VOUT_COMMAND, 16'h0E66, r, cyc);
    check(r.status == PMB_OK, "write word status");
    check(model.log_cmd[n0] == 8'h21 && model.log_data[n0] == 16'h0E66, "write word data, low byte first");
    check(model.vout_cmd[1*4+2] == 16'h0E66, "VOUT_COMMAND register");
    check(cyc >= 38*4*62 && cyc <= 38*4*62 + 3, $sformatf("write word latency %0d", cyc));

    // Read Word: VOUT_COMMAND back
    xfer(XFER_READ_WORD, 7'd53, PMB_VOUT_COMMAND, 16'h0, r, cyc);
    check(r.status == PMB_OK && r.data == 16'h0E66, $sformatf("read word data %h", r.data));
    check(cyc >= 48*4*62 && cyc <= 48*4*62 + 3, $sformatf("read word latency %0d", cyc));

    // Read Word: READ_VOUT returns the slewing output
    xfer(XFER_READ_WORD, 7'd53, PMB_READ_VOUT, 16'h0, r, cyc);
    check(r.status == PMB_OK && r.data < 16'd4096 && r.data >= 16'h0E66,
          $sformatf("READ_VOUT between old and new set-point: %h", r.data));

    // Read Byte: PAGE
    xfer(XFER_READ_BYTE, 7'd53, PMB_PAGE, 16'h0, r, cyc);
    check(r.status == PMB_OK && r.data == 16'h0002, $sformatf("read byte %h", r.data));

    // Send Byte: CLEAR_FAULTS
    n0 = model.clear_faults_count;
    xfer(XFER_SEND_BYTE, 7'd52, PMB_CLEAR_FAULTS, 16'h0, r, cyc);
    check(r.status == PMB_OK && model.clear_faults_count == n0 + 1, "send byte");

    // Address NACK: nobody at 0x20
    n0 = model.log_n;
    xfer(XFER_WRITE_WORD, 7'h20, PMB_VOUT_COMMAND, 16'h1234, r, cyc);
    check(r.status == PMB_ADDR_NACK && model.log_n == n0, "address NACK");
    check(cyc < 20*4*62, "address NACK ends early");

    // Command NACK: unsupported command byte
    xfer(XFER_WRITE_WORD, 7'd54, 8'h99, 16'h1234, r, cyc);
    check(r.status == PMB_DATA_NACK && model.log_n == n0, "command NACK");

    // Clock stretching: transactions still correct, and slower
    stretch_en = 1'b1;
    n0 = model.stretch_count;
    xfer(XFER_WRITE_WORD, 7'd54, PMB_POWER_GOOD_ON, 16'h0CCD, r, cyc);
    check(r.status == PMB_OK && model.pg_on[2*4+0] == 16'h0CCD, "write under stretching");
    check(model.stretch_count == n0 + 1 && cyc > 38*4*62 + 100, $sformatf("stretch seen, latency %0d", cyc));
    xfer(XFER_READ_WORD, 7'd54, PMB_POWER_GOOD_ON, 16'h0, r, cyc);
    check(r.status == PMB_OK && r.data == 16'h0CCD, "read under stretching");
    stretch_en = 1'b0;

    // Random write/read-back words on each device
    for (int i = 0; i < 6; i++) begin
      automatic logic [15:0] v = 16'($urandom);
      automatic logic [6:0]  a = 7'(52 + (i % 3));
      xfer(XFER_WRITE_WORD, a, PMB_VOUT_UV_WARN_LIMIT, v, r, cyc);
      check(r.status == PMB_OK, "random write");
      xfer(XFER_READ_WORD, a, PMB_VOUT_UV_WARN_LIMIT, 16'h0, r, cyc);
      check(r.status == PMB_OK && r.data == v, $sformatf("random readback %h vs %h", r.data, v));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
