// voltune_sweep_bench - one VolTune subsystem plus regulator model that runs
// the controller-characterisation sweeps at one PMBus clock rate.
//
// Used by tb_voltune_sweeps, which instantiates it at 400 kHz and 100 kHz.
// On MGTAVCC (lane 6) it runs the decrease sweep 1.0 V -> 0.9, 0.8, 0.7, 0.6,
// 0.5 V and the increase sweep 0.5, 0.6, 0.7, 0.8, 0.9 V -> 1.0 V. Each run
// uses the test manager's measurement sequence, with WAIT_CYCLES long enough
// (3 ms) for the model to reach the initial level, then NSAMP samples. For
// every run it checks the initial readback and the final level, and computes
// the settling time (stable band +-1 % around the mean of the last 5 samples,
// first run of 5 stable samples). Across a sweep the settling time must not
// fall as the step grows; it must strictly rise when STRICT is set. The mean
// sample interval must be one Read Word plus at most 40 cycles of overhead.
//
// With CASE_STUDY set it then sweeps MGTAVCC from 1.000 V down to 0.700 V in
// 1 mV steps through the direct-command register, checking every
// VOUT_COMMAND word the regulator receives and the final read-back voltage.
//
// Results: checks and failures counters, finished when all is done, and the
// mean sample interval in cycles.
`timescale 1ns/1ps
module voltune_sweep_bench #(
  parameter int unsigned SCL_HZ     = 400_000,
  parameter int          NSAMP      = 48,
  parameter bit          STRICT     = 1'b1,
  parameter bit          CASE_STUDY = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   finished,
  output int   interval
);
  import voltune_pkg::*;

  localparam int QDIV     = 100_000_000 / (4 * SCL_HZ);
  localparam int READ_CYC = 48 * 4 * QDIV;

  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [1:0]  bresp, rresp;
  logic        test_busy, test_done, pmbus_busy;
  logic [2:0]  pm_err_flags;
  logic        m_scl_low, m_sda_low, s_scl_low, s_sda_low;
  wire         scl = !(m_scl_low || s_scl_low);
  wire         sda = !(m_sda_low || s_sda_low);

  voltune_top #(.SCL_HZ(SCL_HZ)) dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(4'hF), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .pmbus_scl_drive_low(m_scl_low), .pmbus_sda_drive_low(m_sda_low),
    .pmbus_scl_i(scl), .pmbus_sda_i(sda),
    .test_busy, .test_done, .pm_err_flags, .pmbus_busy);

  ucd9248_model #(.NUM_DEV(2), .SLEW_CYCLES(100), .LOG_DEPTH(4)) model (
    .clk, .rst_n, .scl, .sda, .scl_drive_low(s_scl_low), .sda_drive_low(s_sda_low),
    .stretch_en(1'b0));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL (%0d Hz): %s", SCL_HZ, what); end
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
      repeat (200) @(posedge clk);
      axi_read(8'h04, st);
    end while (st[0]);
  endtask

  function automatic logic [15:0] enc(int mv);
    return 16'((mv * 4096 + 500) / 1000);
  endfunction

  // stable-band settling index, as in tb_voltune_top
  function automatic int settle_index(int v[NSAMP], int n, real x);
    real avg;
    bit  ok;
    avg = 0.0;
    for (int k = NSAMP - n; k < NSAMP; k++) avg += v[k];
    avg /= n;
    for (int t = 0; t + n <= NSAMP; t++) begin
      ok = 1'b1;
      for (int k = t; k < t + n; k++)
        if (v[k] < avg * (1.0 - x / 100.0) || v[k] > avg * (1.0 + x / 100.0)) ok = 1'b0;
      if (ok) return t;
    end
    return -1;
  endfunction

  // one measurement run; returns the settling time in cycles (-1 if none)
  task automatic run(input int init_mv, input int target_mv, output int t_settle,
                     inout longint sum_iv, inout int n_iv);
    logic [31:0] st, d;
    int volt[NSAMP];
    int ts[NSAMP];
    int idx;
    axi_write(8'h18, init_mv);
    axi_write(8'h1C, target_mv);
    axi_write(8'h00, 32'h1);
    wait_idle(st);
    check(st[1] && !st[2] && st[31:16] == NSAMP, $sformatf("run %0d->%0d status %h", init_mv, target_mv, st));
    axi_read(8'h24, d);
    check(d[15:0] == 16'(init_mv), $sformatf("run %0d->%0d initial readback %0d", init_mv, target_mv, d[15:0]));
    for (int i = 0; i < NSAMP; i++) begin
      axi_write(8'h28, i);
      axi_read(8'h2C, d);
      volt[i] = int'(d[15:0]);
      axi_read(8'h30, d);
      ts[i] = int'(d);
    end
    check(volt[NSAMP-1] == target_mv, $sformatf("run %0d->%0d final %0d mV", init_mv, target_mv, volt[NSAMP-1]));
    sum_iv += ts[NSAMP-1] - ts[0];
    n_iv   += NSAMP - 1;
    idx = settle_index(volt, 5, 1.0);
    t_settle = (idx >= 0) ? ts[idx] : -1;
    check(idx >= 0, "settling found");
    $display("  %0d kHz  %4d mV -> %4d mV : settled at sample %2d, %0.3f ms", SCL_HZ / 1000,
             init_mv, target_mv, idx, t_settle / 100_000.0);
  endtask

  initial begin
    logic [31:0] st, hi, lo;
    int t_dec[5], t_inc[5];
    longint sum_iv;
    int n_iv, ok_words;
    awaddr = 0; araddr = 0; awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    wdata = 0; checks = 0; failures = 0; finished = 1'b0; interval = 0;
    sum_iv = 0; n_iv = 0;
    @(posedge rst_n);
    repeat (5) @(posedge clk);

    axi_write(8'h08, 32'd6);          // MGTAVCC
    axi_write(8'h0C, 32'd400);
    axi_write(8'h10, 32'd450);
    axi_write(8'h14, 32'd420);
    axi_write(8'h20, 32'd300_000);    // 3 ms: let the rail reach the initial level
    axi_write(8'h40, NSAMP);

    $display("decrease sweep, %0d kHz", SCL_HZ / 1000);
    for (int k = 0; k < 5; k++) run(1000, 900 - 100 * k, t_dec[k], sum_iv, n_iv);
    $display("increase sweep, %0d kHz", SCL_HZ / 1000);
    for (int k = 0; k < 5; k++) run(900 - 100 * k, 1000, t_inc[k], sum_iv, n_iv);
    for (int k = 1; k < 5; k++) begin
      check(STRICT ? t_dec[k] > t_dec[k-1] : t_dec[k] >= t_dec[k-1], "decrease: settling grows with the step");
      check(STRICT ? t_inc[k] > t_inc[k-1] : t_inc[k] >= t_inc[k-1], "increase: settling grows with the step");
    end
    interval = int'(sum_iv / n_iv);
    check(interval >= READ_CYC && interval <= READ_CYC + 40,
          $sformatf("mean sample interval %0d cycles, one Read Word is %0d", interval, READ_CYC));
    $display("  %0d kHz mean sample interval %0d cycles = %0.3f ms", SCL_HZ / 1000, interval,
             interval / 100_000.0);

    if (CASE_STUDY) begin
      ok_words = 0;
      for (int mv = 1000; mv >= 700; mv--) begin
        axi_write(8'h34, {4'(OP_SET_VOLTAGE), 4'd6, 8'd0, 16'(mv)});
        wait_idle(st);
        axi_read(8'h3C, hi);
        axi_read(8'h38, lo);
        if (hi[15:12] == VT_OK && lo[31:16] == enc(mv) && model.vout_cmd[6] == enc(mv)) ok_words++;
      end
      check(ok_words == 301, $sformatf("case-study sweep: %0d of 301 steps programmed", ok_words));
      check(enc(999) != enc(1000) && enc(700) != enc(701), "1 mV steps are distinct LINEAR16 words");
      repeat (10_000) @(posedge clk);
      axi_write(8'h34, {4'(OP_GET_VOLTAGE), 4'd6, 8'd0, 16'd0});
      wait_idle(st);
      axi_read(8'h38, lo);
      check(lo[15:0] == 16'd700, $sformatf("case-study sweep ends at %0d mV", lo[15:0]));
      $display("  case study: %0d of 301 one-millivolt steps on MGTAVCC, final read-back %0d mV",
               ok_words, lo[15:0]);
    end
    finished = 1'b1;
  end
endmodule
