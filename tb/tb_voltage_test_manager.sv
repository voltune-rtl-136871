// tb_voltage_test_manager - self-checking test of the Voltage Test Manager.
//
// The PowerManager is replaced by a scripted responder that records every
// command and answers after a fixed latency; Get Voltage answers follow a
// known sequence. An AXI4-Lite host task programs the registers, starts a run,
// polls STATUS and reads the buffer back. Checked: the command order and
// values of the measurement sequence, the 0.1 ms wait, the number of samples,
// the sample values and their time stamps (against times recorded here), the
// target-command latency register, abort on a failed acknowledge, the
// current-telemetry sampling mode, and a direct command.
`timescale 1ns/1ps
module tb_voltage_test_manager;
  import voltune_pkg::*;

  localparam int DEPTH = 16;
  localparam int LAT   = 37;    // responder latency in cycles

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [1:0]  bresp, rresp;
  logic        cmd_valid, cmd_ready, ack_valid, ack_ready, busy, done;
  vt_cmd_t     cmd_data;
  vt_ack_t     ack_data;
  logic [31:0] ts;

  voltage_test_manager #(.DEPTH(DEPTH)) dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(4'hF), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .ts_tvalid(1'b1), .ts_tdata(ts),
    .cmd_valid, .cmd_ready, .cmd_data, .ack_valid, .ack_ready, .ack_data, .busy, .done);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ts <= '0; else ts <= ts + 1;

  // ---------------------------------------------------------- responder
  vt_cmd_t     log_cmd  [128];
  logic [31:0] log_t    [128];     // time of the command handshake
  logic [31:0] ack_t    [128];     // time of the ack handshake
  int          n_cmd = 0;
  int          n_get = 0;
  logic [3:0]  fail_opcode = 4'hF;
  int          pend = 0;
  vt_cmd_t     cur;

  assign cmd_ready = (pend == 0) && !ack_valid;
  always @(posedge clk) begin
    if (cmd_valid && cmd_ready) begin
      log_cmd[n_cmd] = cmd_data;
      log_t[n_cmd]   = ts;
      cur            = cmd_data;
      pend           = LAT;
    end else if (pend > 1) begin
      pend--;
    end else if (pend == 1) begin
      pend = 0;
      ack_valid <= 1'b1;
      ack_data  <= '{status: (cur.opcode == fail_opcode) ? VT_PMBUS_NACK : VT_OK,
                     opcode: cur.opcode, lane: cur.lane, rsvd: '0,
                     raw: (cur.opcode == OP_GET_VOLTAGE) ? 16'(n_get) : 16'h0,
                     value: (cur.opcode == OP_GET_VOLTAGE) ? 16'(1000 - 7 * n_get) : cur.value};
      if (cur.opcode == OP_GET_VOLTAGE) n_get++;
    end
    if (ack_valid && ack_ready) begin
      ack_t[n_cmd] = ts;
      n_cmd++;
      ack_valid <= 1'b0;
    end
  end

  // ---------------------------------------------------------- AXI-Lite host
  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    @(posedge clk);
    awaddr <= a; wdata <= d; awvalid <= 1'b1; wvalid <= 1'b1;
    do @(posedge clk); while (!(awready && wready));
    awvalid <= 1'b0; wvalid <= 1'b0; bready <= 1'b1;
    do @(posedge clk); while (!bvalid);
    bready <= 1'b0;
  endtask
  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    @(posedge clk);
    araddr <= a; arvalid <= 1'b1;
    do @(posedge clk); while (!arready);
    arvalid <= 1'b0; rready <= 1'b1;
    do @(posedge clk); while (!rvalid);
    d = rdata;
    rready <= 1'b0;
  endtask

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (300_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int base, nexp, tgt;
    awaddr = 0; araddr = 0; awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    wdata = 0; ack_valid = 0; ack_data = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;

    axi_read(8'h48, d); check(d == DEPTH, "DEPTH register");
    axi_read(8'h20, d); check(d == 10_000, "default wait is 0.1 ms");
    axi_write(8'h08, 32'd9);      // VCCBRAM
    axi_write(8'h0C, 32'd850);
    axi_write(8'h10, 32'd870);
    axi_write(8'h14, 32'd860);
    axi_write(8'h18, 32'd1000);
    axi_write(8'h1C, 32'd900);
    axi_write(8'h40, 32'd10);
    axi_read(8'h1C, d); check(d == 900, "register read-back");

    // ------------------------------------------------ run 1: 10 samples
    base = n_cmd;
    axi_write(8'h00, 32'h1);
    do axi_read(8'h04, d); while (d[0]);
    check(d[1] && !d[2] && d[31:16] == 10, $sformatf("status after run %h", d));
    nexp = 7 + 10;
    check(n_cmd - base == nexp, $sformatf("%0d commands, want %0d", n_cmd - base, nexp));
    check(log_cmd[base+0].opcode == OP_CLEAR_STATUS, "1: clear status");
    check(log_cmd[base+1].opcode == OP_SET_UV     && log_cmd[base+1].value == 850, "2: set UV");
    check(log_cmd[base+2].opcode == OP_SET_PG_ON  && log_cmd[base+2].value == 870, "3: PG on");
    check(log_cmd[base+3].opcode == OP_SET_PG_OFF && log_cmd[base+3].value == 860, "4: PG off");
    check(log_cmd[base+4].opcode == OP_SET_VOLTAGE && log_cmd[base+4].value == 1000, "5: initial voltage");
    check(log_cmd[base+5].opcode == OP_GET_VOLTAGE, "6: get voltage");
    check(log_t[base+5] - ack_t[base+4] >= 10_000 && log_t[base+5] - ack_t[base+4] <= 10_005,
          $sformatf("0.1 ms wait: %0d cycles", log_t[base+5] - ack_t[base+4]));
    check(log_cmd[base+6].opcode == OP_SET_VOLTAGE && log_cmd[base+6].value == 900, "7: target voltage");
    for (int i = 0; i < 7 + 10; i++) check(log_cmd[base+i].lane == 4'd9, "lane on every command");
    for (int i = 7; i < 17; i++) check(log_cmd[base+i].opcode == OP_GET_VOLTAGE, "sampling loop");
    axi_read(8'h24, d); check(d == {16'd0, 16'd1000}, $sformatf("initial readback %h", d));
    tgt = base + 6;
    axi_read(8'h44, d);
    check(d == ack_t[tgt] - log_t[tgt], $sformatf("target ack latency %0d", d));
    for (int i = 0; i < 10; i++) begin
      axi_write(8'h28, i);
      axi_read(8'h2C, d);
      check(d == {16'(i + 1), 16'(1000 - 7 * (i + 1))}, $sformatf("sample %0d volt %h", i, d));
      axi_read(8'h30, d);
      check(d == ack_t[tgt + 1 + i] - log_t[tgt], $sformatf("sample %0d time %0d vs %0d", i, d,
            ack_t[tgt + 1 + i] - log_t[tgt]));
    end

    // ------------------------------------------------ run 2: full buffer, short wait
    axi_write(8'h40, 32'd1000);   // clipped to DEPTH
    axi_read(8'h40, d); check(d == DEPTH, "NUM_SAMPLES clipped");
    axi_write(8'h20, 32'd5);
    base = n_cmd;
    axi_write(8'h00, 32'h1);
    do axi_read(8'h04, d); while (d[0]);
    check(d[1] && d[31:16] == DEPTH && n_cmd - base == 7 + DEPTH, "full buffer run");

    // ------------------------------------------------ run 3: abort on a NACK
    fail_opcode = OP_SET_PG_OFF;
    base = n_cmd;
    axi_write(8'h00, 32'h1);
    do axi_read(8'h04, d); while (d[0]);
    check(d[1] && d[2] && d[11:8] == VT_PMBUS_NACK && d[15:12] == OP_SET_PG_OFF,
          $sformatf("error status %h", d));
    check(n_cmd - base == 4, "run stopped at the failing command");
    fail_opcode = 4'hF;

    // ------------------------------------------------ run 4: current telemetry loop
    axi_write(8'h40, 32'd3);
    base = n_cmd;
    axi_write(8'h00, 32'h3);
    do axi_read(8'h04, d); while (d[0]);
    check(d[1] && !d[2] && d[31:16] == 3, $sformatf("current run status %h", d));
    check(n_cmd - base == 7 + 3 && log_cmd[base+5].opcode == OP_GET_VOLTAGE,
          "current run: length, readback before the step is a voltage");
    for (int i = 7; i < 10; i++) check(log_cmd[base+i].opcode == OP_GET_CURRENT, "loop issues Get Current");

    // ------------------------------------------------ run 5: back to voltage sampling
    base = n_cmd;
    axi_write(8'h00, 32'h1);
    do axi_read(8'h04, d); while (d[0]);
    check(n_cmd - base == 7 + 3 && log_cmd[base+7].opcode == OP_GET_VOLTAGE, "RUN alone samples voltage");

    // ------------------------------------------------ direct command
    base = n_cmd;
    axi_write(8'h34, {4'(OP_GET_CURRENT), 4'd6, 8'd0, 16'd0});
    do axi_read(8'h04, d); while (d[0]);
    check(n_cmd - base == 1 && log_cmd[base].opcode == OP_GET_CURRENT && log_cmd[base].lane == 4'd6,
          "direct command issued");
    axi_read(8'h3C, d);
    check(d[15:12] == VT_OK && d[11:8] == OP_GET_CURRENT && d[7:4] == 4'd6, $sformatf("direct ack %h", d));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
