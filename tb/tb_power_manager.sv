// tb_power_manager - self-checking test of the Hardware PowerManager.
//
// The PowerManager drives a real PMBus engine (run at 5 MHz SCL to keep the
// simulation short) which talks to the UCD9248 model. The model is built
// with only two devices (addresses 52 and 53), so lanes 8..10 (address 54)
// produce a NACK. The test sends opcode sequences and compares both the
// acknowledge beats and the PMBus transactions the model recorded with
// sequences written out here from the opcode table and the rail map,
// including the paper's worked example (VCCBRAM, 0.9 V) and PAGE being sent
// only when the lane changes.
`timescale 1ns/1ps
module tb_power_manager;
  import voltune_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       cmd_valid, cmd_ready, ack_valid, ack_ready;
  vt_cmd_t    cmd_data;
  vt_ack_t    ack_data;
  logic       req_valid, req_ready, rsp_valid, rsp_ready, busy;
  pmbus_req_t req_data;
  pmbus_rsp_t rsp_data;
  logic [2:0] err_flags;
  logic       lane_selected;
  logic [3:0] cur_lane;
  logic m_scl_low, m_sda_low, s_scl_low, s_sda_low;
  wire  scl = !(m_scl_low || s_scl_low);
  wire  sda = !(m_sda_low || s_sda_low);

  power_manager dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_data, .ack_valid, .ack_ready, .ack_data,
    .pmb_req_valid(req_valid), .pmb_req_ready(req_ready), .pmb_req_data(req_data),
    .pmb_rsp_valid(rsp_valid), .pmb_rsp_ready(rsp_ready), .pmb_rsp_data(rsp_data),
    .err_flags, .lane_selected, .cur_lane);

  axis_pmbus_wrapper #(.CLK_HZ(100_000_000), .SCL_HZ(5_000_000)) u_pmbus (
    .clk, .rst_n, .req_valid, .req_ready, .req_data, .rsp_valid, .rsp_ready, .rsp_data,
    .scl_drive_low(m_scl_low), .sda_drive_low(m_sda_low), .scl_i(scl), .sda_i(sda), .busy);

  ucd9248_model #(.NUM_DEV(2), .SLEW_CYCLES(4)) model (
    .clk, .rst_n, .scl, .sda, .scl_drive_low(s_scl_low), .sda_drive_low(s_sda_low),
    .stretch_en(1'b0));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference LINEAR16 conversions, exponent -12
  function automatic logic [15:0] enc(int mv);
    return 16'((mv * 4096 + 500) / 1000);
  endfunction
  function automatic int dec(logic [15:0] w);
    return (int'(w) * 1000 + 2048) / 4096;
  endfunction

  task automatic send(input logic [3:0] op, input logic [3:0] lane, input logic [15:0] val,
                      output vt_ack_t a);
    @(posedge clk);
    cmd_data  <= '{opcode: op, lane: lane, rsvd: '0, value: val};
    cmd_valid <= 1'b1;
    do @(posedge clk); while (!cmd_ready);
    cmd_valid <= 1'b0;
    do @(posedge clk); while (!ack_valid);
    a = ack_data;
    ack_ready <= 1'b1;
    @(posedge clk);
    ack_ready <= 1'b0;
  endtask

  // compare log entry i of the model with an expected write/read
  task automatic expect_log(int i, logic [6:0] a, logic [7:0] c, logic [15:0] d, logic rd,
                            string what);
    check(model.log_addr[i] == a && model.log_cmd[i] == c && model.log_rd[i] == rd &&
          (rd || model.log_data[i] == d),
          $sformatf("%s: got addr %0d cmd %h data %h rd %0d", what, model.log_addr[i],
                    model.log_cmd[i], model.log_data[i], model.log_rd[i]));
  endtask

  initial begin : watchdog
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vt_ack_t a;
    int n0;
    cmd_valid = 1'b0; ack_ready = 1'b0; cmd_data = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    // Worked example: VCCBRAM (lane 9 -> addr 54 page 1) is on a device this
    // model lacks, so first run it on VCC1V5 (lane 5 -> addr 53 page 1).
    n0 = model.log_n;
    send(OP_CLEAR_STATUS, 4'd5, 16'd0, a);
    check(a.status == VT_OK && model.log_n == n0, "clear status: no PMBus traffic");
    send(OP_SET_UV, 4'd5, 16'd850, a);
    check(a.status == VT_OK && a.raw == enc(850) && a.value == 16'd850, "set UV ack");
    send(OP_SET_PG_ON, 4'd5, 16'd870, a);
    check(a.status == VT_OK && a.raw == enc(870), "set PG on ack");
    send(OP_SET_PG_OFF, 4'd5, 16'd860, a);
    check(a.status == VT_OK && a.raw == enc(860), "set PG off ack");
    send(OP_SET_VOLTAGE, 4'd5, 16'd900, a);
    check(a.status == VT_OK && a.raw == 16'h0E66 && a.raw == enc(900), "set voltage ack");
    check(model.log_n == n0 + 6, $sformatf("six PMBus writes, got %0d", model.log_n - n0));
    expect_log(n0 + 0, 7'd53, 8'h00, 16'h0001, 1'b0, "PAGE 01h");
    expect_log(n0 + 1, 7'd53, 8'h43, enc(850), 1'b0, "VOUT_UV_WARN_LIMIT");
    expect_log(n0 + 2, 7'd53, 8'h44, enc(850), 1'b0, "VOUT_UV_FAULT_LIMIT");
    expect_log(n0 + 3, 7'd53, 8'h5E, enc(870), 1'b0, "POWER_GOOD_ON");
    expect_log(n0 + 4, 7'd53, 8'h5F, enc(860), 1'b0, "POWER_GOOD_OFF");
    expect_log(n0 + 5, 7'd53, 8'h21, enc(900), 1'b0, "VOUT_COMMAND");
    check(lane_selected && cur_lane == 4'd5, "lane 5 selected");

    // Readback on MGTAVCC (lane 6 -> addr 53, page 2): PAGE then READ_VOUT
    n0 = model.log_n;
    repeat (20000) @(posedge clk);  // let the model settle at 0.9 V on lane 5
    send(OP_GET_VOLTAGE, 4'd6, 16'd0, a);
    check(model.log_n == n0 + 2, "readback: two transactions");
    expect_log(n0 + 0, 7'd53, 8'h00, 16'h0002, 1'b0, "readback PAGE 02h");
    expect_log(n0 + 1, 7'd53, 8'h8B, 16'h0, 1'b1, "READ_VOUT");
    check(a.status == VT_OK && a.raw == 16'd4096 && a.value == 16'd1000,
          $sformatf("lane 6 reads 1.000 V: raw %h value %0d", a.raw, a.value));

    // Same lane again: no PAGE
    n0 = model.log_n;
    send(OP_GET_VOLTAGE, 4'd6, 16'd0, a);
    check(model.log_n == n0 + 1 && model.log_cmd[n0] == 8'h8B, "no PAGE when lane unchanged");

    // Back to lane 5: PAGE 01h, then the settled 0.9 V
    n0 = model.log_n;
    send(OP_GET_VOLTAGE, 4'd5, 16'd0, a);
    check(model.log_n == n0 + 2 && model.log_cmd[n0] == 8'h00, "PAGE on lane change");
    check(a.status == VT_OK && a.raw == enc(900) && a.value == 16'(dec(enc(900))),
          $sformatf("lane 5 reads 0.9 V: raw %h value %0d", a.raw, a.value));

    // Current telemetry: LINEAR11 0xD280 = 10.000 A
    n0 = model.log_n;
    send(OP_GET_CURRENT, 4'd5, 16'd0, a);
    check(model.log_n == n0 + 1 && model.log_cmd[n0] == 8'h8C, "READ_IOUT without PAGE");
    check(a.status == VT_OK && a.raw == 16'hD280 && a.value == 16'd10000,
          $sformatf("current %0d mA", a.value));

    // Clear Status forgets the lane: PAGE is sent again
    send(OP_CLEAR_STATUS, 4'd0, 16'd0, a);
    check(!lane_selected, "lane forgotten");
    n0 = model.log_n;
    send(OP_SET_VOLTAGE, 4'd5, 16'd950, a);
    check(model.log_n == n0 + 2 && model.log_cmd[n0] == 8'h00 && model.log_cmd[n0+1] == 8'h21
          && model.log_data[n0+1] == enc(950), "PAGE re-sent after clear");

    // Bad lane, bad opcode: no traffic, sticky flags
    n0 = model.log_n;
    send(OP_SET_VOLTAGE, 4'd12, 16'd900, a);
    check(a.status == VT_BAD_LANE && a.lane == 4'd12 && model.log_n == n0, "bad lane");
    send(4'h9, 4'd1, 16'd900, a);
    check(a.status == VT_BAD_OPCODE && a.opcode == 4'h9 && model.log_n == n0, "bad opcode");
    check(err_flags == 3'b110, $sformatf("error flags %b", err_flags));

    // The worked example's device 54 is absent here: NACK reported
    send(OP_SET_VOLTAGE, 4'd9, 16'd900, a);
    check(a.status == VT_PMBUS_NACK && err_flags[0] && !lane_selected, "NACK on absent device");
    send(OP_CLEAR_STATUS, 4'd0, 16'd0, a);
    check(err_flags == 3'b000, "flags cleared");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
