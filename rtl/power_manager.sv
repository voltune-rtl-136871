// power_manager - the Hardware PowerManager: VolTune opcodes to PMBus sequences.
//
// Accepts one command beat {opcode, lane, value} at a time, expands it into an
// ordered list of PMBus transactions, issues them one by one to the PMBus
// module, and returns one acknowledge beat {status, opcode, lane, raw, value}
// when the list is done or a step failed.
//
//   opcode  operation            PMBus transactions (after PAGE if needed)
//   0x0     Clear Status         none: forgets the selected lane and clears
//                                the sticky error flags
//   0x1     Set Under Voltage    Write Word VOUT_UV_WARN_LIMIT, then
//                                Write Word VOUT_UV_FAULT_LIMIT (same value)
//   0x2     Set Power Good On    Write Word POWER_GOOD_ON
//   0x3     Set Power Good Off   Write Word POWER_GOOD_OFF
//   0x4     Set Voltage          Write Word VOUT_COMMAND
//   0x5     Get Voltage          Read Word READ_VOUT
//   0x6     Get Current          Read Word READ_IOUT (this design's addition)
//
// Rail selection: the lane is looked up in the KC705 rail map to get the
// device address and PAGE. A Write Byte PAGE is sent first only when the lane
// differs from the one last selected (or none is selected, after reset, Clear
// Status or a failed transaction), as the paper describes.
//
// Values: "value" is in millivolts for opcodes 1..4 and is LINEAR16-encoded
// with exponent VOUT_EXP; Get Voltage returns the raw LINEAR16 word and its
// millivolt value; Get Current returns the raw LINEAR11 word and milliamps.
// The opcode table, PAGE-on-lane-change and strictly serialized transactions
// follow the paper; the millivolt interface, writing the same value to both
// under-voltage limits, opcode 0x6 and the status codes are this design's.
//
// Timing: 2 cycles from command to first PMBus request, 1 cycle between a
// PMBus response and the next request, 1 cycle from the last response to the
// acknowledge. The rest is PMBus time.
//
// Reserved acknowledge bits and unused status-code bits are constant zero.
module power_manager
  import voltune_pkg::*;
#(
  parameter int VOUT_EXP = -12
) (
  input  logic       clk,
  input  logic       rst_n,
  // command stream from the requester
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  vt_cmd_t    cmd_data,
  // acknowledge stream to the requester
  output logic       ack_valid,
  input  logic       ack_ready,
  output vt_ack_t    ack_data,
  // request stream to the PMBus module
  output logic       pmb_req_valid,
  input  logic       pmb_req_ready,
  output pmbus_req_t pmb_req_data,
  // response stream from the PMBus module
  input  logic       pmb_rsp_valid,
  output logic       pmb_rsp_ready,
  input  pmbus_rsp_t pmb_rsp_data,
  // status
  output logic [2:0] err_flags,     // sticky: {bad opcode, bad lane, PMBus NACK}
  output logic       lane_selected, // a PAGE is known to be in effect
  output logic [3:0] cur_lane
);

  typedef enum logic [2:0] {P_IDLE, P_DECODE, P_REQ, P_WAIT, P_ACK} pstate_e;
  typedef enum logic [1:0] {STEP_PAGE, STEP_CMD1, STEP_CMD2} step_e;

  pstate_e    state;
  step_e      step;
  vt_cmd_t    cmd_q;
  logic [6:0] addr_q;
  logic [7:0] page_q;
  vt_ack_t    ack_q;

  // rail map
  logic [6:0] map_addr;
  logic [7:0] map_page;
  logic       map_valid;
  kc705_lane_map u_map (.lane(cmd_q.lane), .addr(map_addr), .page(map_page), .valid(map_valid));

  // fixed-point conversions
  logic [15:0]        enc_word, dec_mv;
  logic signed [15:0] l11_milli;
  pmbus_linear_codec #(.VOUT_EXP(VOUT_EXP)) u_codec (
    .enc_mv(cmd_q.value), .enc_word(enc_word),
    .dec_word(pmb_rsp_data.data), .dec_mv(dec_mv),
    .l11_word(pmb_rsp_data.data), .l11_milli(l11_milli));

  // PMBus transaction for the current step
  always_comb begin
    pmb_req_data = '{xfer: XFER_WRITE_WORD, addr: addr_q, cmd: PMB_VOUT_COMMAND, data: enc_word};
    if (step == STEP_PAGE) begin
      pmb_req_data.xfer = XFER_WRITE_BYTE;
      pmb_req_data.cmd  = PMB_PAGE;
      pmb_req_data.data = {8'h00, page_q};
    end else if (step == STEP_CMD2) begin
      pmb_req_data.cmd  = PMB_VOUT_UV_FAULT_LIMIT;
    end else begin
      unique case (cmd_q.opcode)
        OP_SET_UV:      pmb_req_data.cmd = PMB_VOUT_UV_WARN_LIMIT;
        OP_SET_PG_ON:   pmb_req_data.cmd = PMB_POWER_GOOD_ON;
        OP_SET_PG_OFF:  pmb_req_data.cmd = PMB_POWER_GOOD_OFF;
        OP_GET_VOLTAGE: begin
          pmb_req_data.xfer = XFER_READ_WORD;
          pmb_req_data.cmd  = PMB_READ_VOUT;
          pmb_req_data.data = '0;
        end
        OP_GET_CURRENT: begin
          pmb_req_data.xfer = XFER_READ_WORD;
          pmb_req_data.cmd  = PMB_READ_IOUT;
          pmb_req_data.data = '0;
        end
        default:        pmb_req_data.cmd = PMB_VOUT_COMMAND;
      endcase
    end
  end

  function automatic vt_ack_t make_ack(vt_status_e st, vt_cmd_t c, logic [15:0] raw,
                                       logic [15:0] val);
    return '{status: st, opcode: c.opcode, lane: c.lane, rsvd: '0, raw: raw, value: val};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= P_IDLE;
      step          <= STEP_PAGE;
      cmd_q         <= '0;
      addr_q        <= '0;
      page_q        <= '0;
      ack_q         <= '0;
      err_flags     <= '0;
      lane_selected <= 1'b0;
      cur_lane      <= '0;
    end else begin
      unique case (state)
        P_IDLE: if (cmd_valid) begin
          cmd_q <= cmd_data;
          state <= P_DECODE;
        end

        P_DECODE: begin
          addr_q <= map_addr;
          page_q <= map_page;
          state  <= P_ACK;
          if (cmd_q.opcode == OP_CLEAR_STATUS) begin
            lane_selected <= 1'b0;
            err_flags     <= '0;
            ack_q         <= make_ack(VT_OK, cmd_q, '0, '0);
          end else if (cmd_q.opcode > OP_GET_CURRENT) begin
            err_flags[2]  <= 1'b1;
            ack_q         <= make_ack(VT_BAD_OPCODE, cmd_q, '0, '0);
          end else if (!map_valid) begin
            err_flags[1]  <= 1'b1;
            ack_q         <= make_ack(VT_BAD_LANE, cmd_q, '0, '0);
          end else begin
            step  <= (lane_selected && cur_lane == cmd_q.lane) ? STEP_CMD1 : STEP_PAGE;
            state <= P_REQ;
          end
        end

        P_REQ: if (pmb_req_ready) state <= P_WAIT;

        P_WAIT: if (pmb_rsp_valid) begin
          if (pmb_rsp_data.status != PMB_OK) begin
            lane_selected <= 1'b0;
            err_flags[0]  <= 1'b1;
            ack_q         <= make_ack(VT_PMBUS_NACK, cmd_q, '0, '0);
            state         <= P_ACK;
          end else if (step == STEP_PAGE) begin
            lane_selected <= 1'b1;
            cur_lane      <= cmd_q.lane;
            step          <= STEP_CMD1;
            state         <= P_REQ;
          end else if (step == STEP_CMD1 && cmd_q.opcode == OP_SET_UV) begin
            step          <= STEP_CMD2;
            state         <= P_REQ;
          end else begin
            if (cmd_q.opcode == OP_GET_VOLTAGE)
              ack_q <= make_ack(VT_OK, cmd_q, pmb_rsp_data.data, dec_mv);
            else if (cmd_q.opcode == OP_GET_CURRENT)
              ack_q <= make_ack(VT_OK, cmd_q, pmb_rsp_data.data, l11_milli);
            else
              ack_q <= make_ack(VT_OK, cmd_q, enc_word, cmd_q.value);
            state <= P_ACK;
          end
        end

        P_ACK: if (ack_ready) state <= P_IDLE;

        default: state <= P_IDLE;
      endcase
    end
  end

  assign cmd_ready     = (state == P_IDLE);
  assign ack_valid     = (state == P_ACK);
  assign ack_data      = ack_q;
  assign pmb_req_valid = (state == P_REQ);
  assign pmb_rsp_ready = (state == P_WAIT);

  // Serialized execution: no new PMBus request while one is outstanding.
  a_serial: assert property (@(posedge clk) disable iff (!rst_n)
                             pmb_req_valid |-> !pmb_rsp_ready);
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               pmb_req_valid && !pmb_req_ready |=> pmb_req_valid && $stable(pmb_req_data));
  a_ack_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               ack_valid && !ack_ready |=> ack_valid && $stable(ack_data));

endmodule
