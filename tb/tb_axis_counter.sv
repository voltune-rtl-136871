// tb_axis_counter - checks that the counter advances exactly once per enabled
// cycle, holds while disabled, clears synchronously and wraps at 2^WIDTH
// (WIDTH reduced to 8 so the wrap is reached quickly).
`timescale 1ns/1ps
module tb_axis_counter;
  logic clk = 1'b0, rst_n = 1'b0, en, clr;
  logic       tvalid;
  logic [7:0] tdata;
  always #5 clk = ~clk;

  axis_counter #(.WIDTH(8)) dut (.clk, .rst_n, .en, .clr, .m_axis_tvalid(tvalid), .m_axis_tdata(tdata));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (10_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expected = 0;
    en = 1'b0; clr = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(tdata == 8'd0 && !tvalid, "reset value");
    // random enable pattern, compared against a model
    for (int i = 0; i < 1000; i++) begin
      en  = 1'($urandom_range(0, 3) != 0);
      clr = 1'($urandom_range(0, 199) == 0);
      @(posedge clk);
      if (clr) expected = 0;
      else if (en) expected = (expected + 1) % 256;
      @(negedge clk);
      check(tdata == 8'(expected) && tvalid == en, $sformatf("step %0d: %0d vs %0d", i, tdata, expected));
    end
    // exact rate: 100 enabled cycles advance by 100
    en = 1'b1; clr = 1'b1; @(posedge clk); @(negedge clk); clr = 1'b0;
    repeat (100) @(posedge clk);
    @(negedge clk);
    check(tdata == 8'd100, $sformatf("100 cycles -> %0d", tdata));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
