// tb_voltune_sweeps - the controller-characterisation workload: voltage
// decrease and increase sweeps on the hardware path at both PMBus clock rates,
// plus the transceiver case study's 1 mV voltage sweep.
//
// Two complete subsystems run side by side, one at 400 kHz and one at
// 100 kHz, each against its own regulator model (see voltune_sweep_bench).
// Beyond the per-bench checks, the 100 kHz path must sample more coarsely
// than the 400 kHz one. The settling times and sample intervals are printed
// so they can be set against the hardware measurements (0.2 ms and 0.6 ms
// sample intervals, 2.3 ms for 1.0 V -> 0.5 V at 400 kHz); the regulator
// model's slew rate, not this logic, sets the settling times.
`timescale 1ns/1ps
module tb_voltune_sweeps;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int c_fast, f_fast, c_slow, f_slow, iv_fast, iv_slow;
  bit done_fast, done_slow;
  int checks = 0, failures = 0;

  voltune_sweep_bench #(.SCL_HZ(400_000), .NSAMP(48), .STRICT(1'b1), .CASE_STUDY(1'b1)) fast (
    .clk, .rst_n, .checks(c_fast), .failures(f_fast), .finished(done_fast), .interval(iv_fast));
  voltune_sweep_bench #(.SCL_HZ(100_000), .NSAMP(24), .STRICT(1'b0), .CASE_STUDY(1'b0)) slow (
    .clk, .rst_n, .checks(c_slow), .failures(f_slow), .finished(done_slow), .interval(iv_slow));

  initial begin : watchdog
    repeat (40_000_000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c_fast + c_slow, f_fast + f_slow + 1);
    $finish;
  end

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    wait (done_fast && done_slow);
    checks   = c_fast + c_slow + 1;
    failures = f_fast + f_slow;
    if (!(iv_slow > 3 * iv_fast)) begin
      failures++;
      $display("FAIL: 100 kHz interval %0d not coarser than 400 kHz interval %0d", iv_slow, iv_fast);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
