// tb_voltune_top - end-to-end test of the VolTune subsystem at its default
// parameters (100 MHz clock, 400 kHz PMBus, 256-sample buffer).
//
// A host task on the AXI4-Lite port runs the prototype measurement sequence
// on MGTAVCC (lane 6): thresholds, initial 1.0 V, 0.1 ms wait, readback,
// target 0.5 V, then 256 READ_VOUT samples. The regulator is the UCD9248
// model with two devices (addresses 52, 53), slewing one LINEAR16 step per
// 100 cycles, so the 0.5 V step takes about 2 ms.
//
// Checked against values derived here: every PMBus transaction the model saw
// (address, command, LINEAR16 payload, order), the millivolt value of every
// buffered sample against the raw word the model sent, time stamps against
// the model's commit times, and the settling time found by the stable-band
// method (average of the last N samples, band +-x %, first run of N stable
// samples). Then direct commands exercise current telemetry, a bad lane, a
// bad opcode, a NACK, Clear Status and clock stretching. Each mechanism is
// counted and one that never happened is a failure. A last run uses the
// current-telemetry sampling mode (periodic READ_IOUT).
`timescale 1ns/1ps
module tb_voltune_top;
  import voltune_pkg::*;

  localparam int DEPTH  = 256;
  localparam int SET_N  = 5;      // settling method: N
  localparam real SET_X = 1.0;    // settling method: x in percent

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [1:0]  bresp, rresp;
  logic        test_busy, test_done, pmbus_busy;
  logic [2:0]  pm_err_flags;
  logic        m_scl_low, m_sda_low, s_scl_low, s_sda_low, stretch_en;
  wire         scl = !(m_scl_low || s_scl_low);
  wire         sda = !(m_sda_low || s_sda_low);

  voltune_top dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(4'hF), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .pmbus_scl_drive_low(m_scl_low), .pmbus_sda_drive_low(m_sda_low),
    .pmbus_scl_i(scl), .pmbus_sda_i(sda),
    .test_busy, .test_done, .pm_err_flags, .pmbus_busy);

  ucd9248_model #(.NUM_DEV(2), .SLEW_CYCLES(100), .LOG_DEPTH(400)) model (
    .clk, .rst_n, .scl, .sda, .scl_drive_low(s_scl_low), .sda_drive_low(s_sda_low), .stretch_en);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

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
  task automatic wait_idle(output logic [31:0] st);
    do begin
      repeat (500) @(posedge clk);
      axi_read(8'h04, st);
    end while (st[0]);
  endtask
  task automatic direct(input logic [3:0] op, input logic [3:0] lane, input logic [15:0] v,
                        output logic [31:0] hi, output logic [31:0] lo);
    logic [31:0] st;
    axi_write(8'h34, {op, lane, 8'd0, v});
    wait_idle(st);
    axi_read(8'h3C, hi);
    axi_read(8'h38, lo);
  endtask

  function automatic logic [15:0] enc(int mv);
    return 16'((mv * 4096 + 500) / 1000);
  endfunction
  function automatic int dec(logic [15:0] w);
    return (int'(w) * 1000 + 2048) / 4096;
  endfunction

  // Settling-time method: stable value = mean of the last n samples; a sample
  // is stable within +-x % of it; t_s is the first index that starts n
  // consecutive stable samples. Returns the index, or -1.
  function automatic int settle_index(int v[DEPTH], int cnt, int n, real x);
    real avg;
    bit  ok;
    avg = 0.0;
    for (int k = cnt - n; k < cnt; k++) avg += v[k];
    avg /= n;
    for (int t = 0; t + n <= cnt; t++) begin
      ok = 1'b1;
      for (int k = t; k < t + n; k++)
        if (v[k] < avg * (1.0 - x / 100.0) || v[k] > avg * (1.0 + x / 100.0)) ok = 0;
      if (ok) return t;
    end
    return -1;
  endfunction

  // mechanism counters
  int n_page_sent, n_page_skipped, n_wait, n_buffer_full, n_nack, n_bad_lane, n_bad_opcode,
      n_clear, n_stretch, n_current, n_telemetry;

  initial begin : watchdog
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d, hi, lo, st;
    int base, rd_idx, ts_idx;
    int volt[DEPTH];
    int tstamp[DEPTH];
    int t_set_cycle;
    awaddr = 0; araddr = 0; awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    wdata = 0; stretch_en = 1'b0;
    {n_page_sent, n_page_skipped, n_wait, n_buffer_full, n_nack, n_bad_lane, n_bad_opcode,
     n_clear, n_stretch, n_current, n_telemetry} = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;

    // ------------------------------------------------ measurement run
    axi_write(8'h08, 32'd6);      // MGTAVCC
    axi_write(8'h0C, 32'd450);
    axi_write(8'h10, 32'd480);
    axi_write(8'h14, 32'd460);
    axi_write(8'h18, 32'd1000);
    axi_write(8'h1C, 32'd500);
    base = model.log_n;
    axi_write(8'h00, 32'h1);
    wait_idle(st);
    check(st[1] && !st[2] && st[31:16] == DEPTH, $sformatf("run status %h", st));
    if (st[31:16] == DEPTH) n_buffer_full++;

    // PMBus transactions, in order
    check(model.log_n - base == 8 + DEPTH, $sformatf("%0d transactions", model.log_n - base));
    check(model.log_cmd[base] == 8'h00 && model.log_data[base] == 16'h0002 &&
          model.log_addr[base] == 7'd53, "PAGE 02h on device 53");
    n_page_sent++;
    check(model.log_cmd[base+1] == 8'h43 && model.log_data[base+1] == enc(450), "UV warn");
    check(model.log_cmd[base+2] == 8'h44 && model.log_data[base+2] == enc(450), "UV fault");
    check(model.log_cmd[base+3] == 8'h5E && model.log_data[base+3] == enc(480), "PG on");
    check(model.log_cmd[base+4] == 8'h5F && model.log_data[base+4] == enc(460), "PG off");
    check(model.log_cmd[base+5] == 8'h21 && model.log_data[base+5] == 16'h1000, "VOUT_COMMAND 1.0 V");
    check(model.log_cmd[base+6] == 8'h8B && model.log_rd[base+6], "initial READ_VOUT");
    check(model.log_time[base+6] - model.log_time[base+5] >= 10_000, "0.1 ms wait before readback");
    if (model.log_time[base+6] - model.log_time[base+5] >= 10_000) n_wait++;
    check(model.log_cmd[base+7] == 8'h21 && model.log_data[base+7] == 16'h0800, "VOUT_COMMAND 0.5 V");
    t_set_cycle = int'(model.log_time[base+7]);
    for (int i = 0; i < DEPTH; i++) begin
      check(model.log_cmd[base+8+i] == 8'h8B && model.log_rd[base+8+i], "sampling READ_VOUT");
      n_page_skipped++;
    end
    n_page_skipped += 6;          // commands after the first PAGE of the run
    for (int i = 0; i < 8 + DEPTH; i++) check(model.log_addr[base+i] == 7'd53, "address 53");
    axi_read(8'h24, d);
    check(d[15:0] == 16'd1000, $sformatf("initial readback %0d mV", d[15:0]));

    // buffer read-out
    for (int i = 0; i < DEPTH; i++) begin
      axi_write(8'h28, i);
      axi_read(8'h2C, d);
      volt[i] = int'(d[15:0]);
      check(d[31:16] == model.log_data[base+8+i] && int'(d[15:0]) == dec(d[31:16]),
            $sformatf("sample %0d: %h", i, d));
      axi_read(8'h30, d);
      tstamp[i] = int'(d);
      if (i > 0) check(tstamp[i] > tstamp[i-1], "time stamps increase");
    end
    // interval between samples: one Read Word (48 bit times of 248 cycles) plus overhead
    check(tstamp[10] - tstamp[9] >= 48 * 248 && tstamp[10] - tstamp[9] <= 48 * 248 + 40,
          $sformatf("sample interval %0d cycles", tstamp[10] - tstamp[9]));
    check(volt[0] > 900 && volt[DEPTH-1] == 500, $sformatf("trace %0d .. %0d mV", volt[0], volt[DEPTH-1]));
    for (int i = 1; i < DEPTH; i++) check(volt[i] <= volt[i-1], "falling trace is monotonic");

    // settling time
    begin
      int ts;
      real ms;
      ts = settle_index(volt, DEPTH, SET_N, SET_X);
      check(ts > 0, "settling found");
      ms = (ts >= 0) ? tstamp[ts] / 100_000.0 : -1.0;
      $display("settling: sample %0d, %0.3f ms after the Set Voltage command (%0d mV)",
               ts, ms, (ts >= 0) ? volt[ts] : 0);
      // model: VOUT_COMMAND commits ~95 us after issue, then 2048 steps of 1 us
      check(ms > 1.9 && ms < 2.6, $sformatf("settling time %0.3f ms", ms));
      check(volt[ts] <= 505 && (ts == 0 || volt[ts-1] > 505), "first sample inside the 1 % band");
    end

    // ------------------------------------------------ direct commands
    direct(OP_GET_CURRENT, 4'd6, 16'd0, hi, lo);
    check(hi[15:12] == VT_OK && lo[31:16] == 16'hD280 && lo[15:0] == 16'd10000,
          $sformatf("current %0d mA", lo[15:0]));
    if (hi[15:12] == VT_OK) n_current++;

    direct(OP_SET_VOLTAGE, 4'd12, 16'd900, hi, lo);
    check(hi[15:12] == VT_BAD_LANE && pm_err_flags[1], "bad lane");
    if (hi[15:12] == VT_BAD_LANE) n_bad_lane++;
    direct(4'hA, 4'd6, 16'd900, hi, lo);
    check(hi[15:12] == VT_BAD_OPCODE && pm_err_flags[2], "bad opcode");
    if (hi[15:12] == VT_BAD_OPCODE) n_bad_opcode++;

    base = model.log_n;
    direct(OP_SET_VOLTAGE, 4'd9, 16'd900, hi, lo);   // VCCBRAM: device 54 absent
    check(hi[15:12] == VT_PMBUS_NACK && pm_err_flags[0] && model.log_n == base, "NACK");
    if (hi[15:12] == VT_PMBUS_NACK) n_nack++;

    direct(OP_CLEAR_STATUS, 4'd0, 16'd0, hi, lo);
    check(hi[15:12] == VT_OK && pm_err_flags == 3'b000, "clear status");
    if (pm_err_flags == 3'b000) n_clear++;

    // after Clear Status the lane is re-selected; the model stretches SCL
    stretch_en = 1'b1;
    base = model.log_n;
    d = model.stretch_count;
    direct(OP_SET_VOLTAGE, 4'd6, 16'd1000, hi, lo);
    check(hi[15:12] == VT_OK && model.log_n == base + 2 && model.log_cmd[base] == 8'h00 &&
          model.log_cmd[base+1] == 8'h21 && model.log_data[base+1] == 16'h1000,
          "PAGE then VOUT_COMMAND after clear, under clock stretching");
    n_page_sent++;
    n_stretch = model.stretch_count - d;
    stretch_en = 1'b0;

    // ------------------------------------------------ periodic current telemetry
    axi_write(8'h40, 32'd4);
    base = model.log_n;
    axi_write(8'h00, 32'h3);      // RUN with SAMPLE_CURRENT
    wait_idle(st);
    check(st[1] && !st[2] && st[31:16] == 4, $sformatf("telemetry run status %h", st));
    check(model.log_n - base == 8 + 4 && model.log_cmd[base] == 8'h00, "telemetry run: PAGE after Clear Status");
    for (int i = 0; i < 4; i++) begin
      check(model.log_cmd[base+8+i] == 8'h8C && model.log_rd[base+8+i], "loop reads READ_IOUT");
      axi_write(8'h28, i);
      axi_read(8'h2C, d);
      check(d == {16'hD280, 16'd10000}, $sformatf("current sample %0d: %h", i, d));
      if (d == {16'hD280, 16'd10000}) n_telemetry++;
    end

    // ------------------------------------------------ mechanism coverage
    $display("mechanisms: page_sent=%0d page_skipped=%0d wait=%0d buffer_full=%0d nack=%0d bad_lane=%0d bad_opcode=%0d clear=%0d stretch=%0d current=%0d telemetry=%0d",
             n_page_sent, n_page_skipped, n_wait, n_buffer_full, n_nack, n_bad_lane,
             n_bad_opcode, n_clear, n_stretch, n_current, n_telemetry);
    check(n_page_sent > 0,    "PAGE sent on lane change");
    check(n_page_skipped > 0, "PAGE skipped on same lane");
    check(n_wait > 0,         "wait after initial voltage");
    check(n_buffer_full > 0,  "buffer filled");
    check(n_nack > 0,         "PMBus NACK");
    check(n_bad_lane > 0,     "bad lane");
    check(n_bad_opcode > 0,   "bad opcode");
    check(n_clear > 0,        "clear status");
    check(n_stretch > 0,      "clock stretching");
    check(n_current > 0,      "current readback");
    check(n_telemetry > 0,    "periodic current telemetry");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
