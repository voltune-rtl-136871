// kc705_lane_map - rail map of the KC705 board.
//
// A lane number is VolTune's own name for one regulator output. This
// combinational table turns it into the 7-bit PMBus address of the UCD9248
// that drives the rail and the PAGE value that selects the output inside that
// device. The eleven entries are the published KC705 rail map:
//
//   lane  rail         addr  page      lane  rail         addr  page
//    0    VCCINT        52    0          6    MGTAVCC      53    2
//    1    VCCAUX        52    1          7    MGTAVTT      53    3
//    2    VCC3V3        52    2          8    ACCAUX_IO    54    0
//    3    VADF          52    3          9    VCCBRAM      54    1
//    4    VCC2V5        53    0         10    MGTVCCAUX    54    2
//    5    VCC1V5        53    1
//
// The table prints the addresses as 52, 53 and 54; they are read here as
// decimal 7-bit addresses (0x34..0x36), which is this design's reading.
// Lanes 11..15 are outside the map and return valid = 0. Porting to another
// board means replacing this table only.
//
// Interface: lane in; addr, page, valid out. No clock, zero latency.
//
// Constant outputs: PAGE[7:2] is always zero and the address bits that the
// three device addresses share are constants; the outputs keep full width so
// the byte can go straight into a PAGE write.
module kc705_lane_map
(
  input  logic [3:0] lane,
  output logic [6:0] addr,
  output logic [7:0] page,
  output logic       valid
);

  always_comb begin
    valid = 1'b1;
    addr  = 7'd0;
    page  = 8'd0;
    unique case (lane)
      4'd0:  begin addr = 7'd52; page = 8'd0; end  // VCCINT
      4'd1:  begin addr = 7'd52; page = 8'd1; end  // VCCAUX
      4'd2:  begin addr = 7'd52; page = 8'd2; end  // VCC3V3
      4'd3:  begin addr = 7'd52; page = 8'd3; end  // VADF
      4'd4:  begin addr = 7'd53; page = 8'd0; end  // VCC2V5
      4'd5:  begin addr = 7'd53; page = 8'd1; end  // VCC1V5
      4'd6:  begin addr = 7'd53; page = 8'd2; end  // MGTAVCC
      4'd7:  begin addr = 7'd53; page = 8'd3; end  // MGTAVTT
      4'd8:  begin addr = 7'd54; page = 8'd0; end  // ACCAUX_IO
      4'd9:  begin addr = 7'd54; page = 8'd1; end  // VCCBRAM
      4'd10: begin addr = 7'd54; page = 8'd2; end  // MGTVCCAUX
      default: valid = 1'b0;
    endcase
  end

endmodule
