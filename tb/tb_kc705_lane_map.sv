// tb_kc705_lane_map - checks all sixteen lane codes against the KC705 rail
// map table (lane, PMBus address, PAGE) written out independently here.
`timescale 1ns/1ps
module tb_kc705_lane_map;
  logic [3:0] lane;
  logic [6:0] addr;
  logic [7:0] page;
  logic       valid;

  kc705_lane_map dut (.lane, .addr, .page, .valid);

  int checks = 0, failures = 0;
  // {addr, page} per lane, from the rail map table
  int exp_addr [11] = '{52, 52, 52, 52, 53, 53, 53, 53, 54, 54, 54};
  int exp_page [11] = '{ 0,  1,  2,  3,  0,  1,  2,  3,  0,  1,  2};

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < 16; l++) begin
      lane = 4'(l);
      #1;
      checks++;
      if (l < 11) begin
        if (!(valid && addr == 7'(exp_addr[l]) && page == 8'(exp_page[l]))) begin
          failures++;
          $display("FAIL: lane %0d -> addr %0d page %0d valid %0d", l, addr, page, valid);
        end
      end else if (valid) begin
        failures++;
        $display("FAIL: lane %0d should be invalid", l);
      end
    end
    // the two worked examples: VCCBRAM and MGTAVCC
    lane = 4'd9; #1; checks++;
    if (!(addr == 7'd54 && page == 8'h01)) begin failures++; $display("FAIL: VCCBRAM"); end
    lane = 4'd6; #1; checks++;
    if (!(addr == 7'd53 && page == 8'h02)) begin failures++; $display("FAIL: MGTAVCC"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
