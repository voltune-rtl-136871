// axis_pmbus_wrapper - PMBus transaction engine (the "PMBus module").
//
// Takes one PMBus transaction per stream beat from the PowerManager, performs
// it on the open-drain SCL/SDA pair and returns one response beat with the
// completion status and any read data. Only one transaction is ever in
// flight: req_ready stays low from acceptance until the response has been
// taken, which gives the serialized execution the PowerManager relies on.
//
// Supported transaction types (byte order as in the PMBus primitives):
//   Send Byte   S addr+W A cmd A P
//   Write Byte  S addr+W A cmd A d0 A P
//   Write Word  S addr+W A cmd A d[7:0] A d[15:8] A P
//   Read Byte   S addr+W A cmd A Sr addr+R A d NA P
//   Read Word   S addr+W A cmd A Sr addr+R A d[7:0] A d[15:8] NA P
// A missing ACK ends the transaction at once with a STOP and reports
// PMB_ADDR_NACK (address byte) or PMB_DATA_NACK (command or data byte).
//
// Bit timing: every SCL period is split into four quarters of QDIV clock
// cycles, QDIV = CLK_HZ / (4 * SCL_HZ). SDA changes in the first quarter while
// SCL is low, SCL is released in the second, SDA is sampled in the third and
// SCL is driven low in the fourth. START/repeated START raise SDA, release
// SCL, then pull SDA low while SCL is high; STOP does the reverse. A slave
// holding SCL low (clock stretching) pauses the engine in the second quarter
// until SCL is seen high.
//
// Pins: *_drive_low = 1 pulls the line low, 0 releases it (to be wired to an
// open-drain pad); scl_i/sda_i are the line levels, synchronised here by two
// flip-flops. The paper gives the module's role, its stream interfaces, the
// primitives and the 100/400 kHz rates; the bit-level engine is this design's.
//
// Timing at 100 MHz and 400 kHz: one bit takes 4*62 = 248 cycles; a Write
// Word is 1 START + 36 bits + STOP, about 9.5k cycles (95 us).
module axis_pmbus_wrapper
  import voltune_pkg::*;
#(
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned SCL_HZ = 400_000
) (
  input  logic       clk,
  input  logic       rst_n,
  // request stream
  input  logic       req_valid,
  output logic       req_ready,
  input  pmbus_req_t req_data,
  // response stream
  output logic       rsp_valid,
  input  logic       rsp_ready,
  output pmbus_rsp_t rsp_data,
  // PMBus pins
  output logic       scl_drive_low,
  output logic       sda_drive_low,
  input  logic       scl_i,
  input  logic       sda_i,
  output logic       busy
);

  localparam int unsigned QDIV = (CLK_HZ / (4 * SCL_HZ)) < 2 ? 2 : CLK_HZ / (4 * SCL_HZ);
  localparam int unsigned QW   = $clog2(QDIV + 1);

  // Byte-level steps of a transaction.
  typedef enum logic [3:0] {
    S_IDLE, S_START, S_ADDR_W, S_CMD, S_WDATA0, S_WDATA1,
    S_RSTART, S_ADDR_R, S_RDATA0, S_RDATA1, S_STOP, S_RESP
  } state_e;

  state_e        state;
  pmbus_req_t    req_q;
  pmbus_status_e status_q;
  logic [15:0]   rdata_q;

  logic [QW-1:0] qcnt;     // cycles left in the current quarter
  logic [1:0]    quarter;  // 0..3
  logic [3:0]    bitn;     // 0..7 data bits, 8 = acknowledge bit
  logic [7:0]    shreg;    // byte being sent or received
  logic          scl_q, sda_q;

  // input synchronisers
  logic [1:0] scl_sync, sda_sync;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scl_sync <= 2'b11;
      sda_sync <= 2'b11;
    end else begin
      scl_sync <= {scl_sync[0], scl_i};
      sda_sync <= {sda_sync[0], sda_i};
    end
  end
  wire scl_in = scl_sync[1];
  wire sda_in = sda_sync[1];

  wire tick = (qcnt == '0);
  // SCL was released in the previous quarter; a slave still holding it low
  // is stretching the clock, so the engine waits before acting on quarter 2.
  wire stretch = (quarter == 2'd2) && !scl_in;

  // Steps that shift a byte out, and those that shift a byte in.
  function automatic logic is_tx(state_e s);
    return s inside {S_ADDR_W, S_CMD, S_WDATA0, S_WDATA1, S_ADDR_R};
  endfunction
  function automatic logic is_rx(state_e s);
    return s inside {S_RDATA0, S_RDATA1};
  endfunction

  // Byte to send at the start of each transmit step.
  function automatic logic [7:0] tx_byte(state_e s, pmbus_req_t r);
    unique case (s)
      S_ADDR_W: return {r.addr, 1'b0};
      S_CMD:    return r.cmd;
      S_WDATA0: return r.data[7:0];
      S_WDATA1: return r.data[15:8];
      S_ADDR_R: return {r.addr, 1'b1};
      default:  return 8'hFF;
    endcase
  endfunction

  // Step that follows a successfully completed byte.
  function automatic state_e next_step(state_e s, pmbus_xfer_e x);
    unique case (s)
      S_START:  return S_ADDR_W;
      S_ADDR_W: return S_CMD;
      S_CMD:    return (x == XFER_SEND_BYTE) ? S_STOP :
                       (x == XFER_READ_BYTE || x == XFER_READ_WORD) ? S_RSTART : S_WDATA0;
      S_WDATA0: return (x == XFER_WRITE_WORD) ? S_WDATA1 : S_STOP;
      S_WDATA1: return S_STOP;
      S_RSTART: return S_ADDR_R;
      S_ADDR_R: return S_RDATA0;
      S_RDATA0: return (x == XFER_READ_WORD) ? S_RDATA1 : S_STOP;
      S_RDATA1: return S_STOP;
      default:  return S_IDLE;
    endcase
  endfunction

  // The master acknowledges every read byte except the last one.
  wire last_rx = (state == S_RDATA1) ||
                 (state == S_RDATA0 && req_q.xfer != XFER_READ_WORD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      req_q    <= '0;
      status_q <= PMB_OK;
      rdata_q  <= '0;
      qcnt     <= '0;
      quarter  <= '0;
      bitn     <= '0;
      shreg    <= '1;
      scl_q    <= 1'b1;
      sda_q    <= 1'b1;
    end else begin
      if (!tick) qcnt <= qcnt - 1'b1;

      unique case (state)
        S_IDLE: begin
          scl_q <= 1'b1;
          sda_q <= 1'b1;
          if (req_valid) begin
            req_q    <= req_data;
            status_q <= PMB_OK;
            rdata_q  <= '0;
            state    <= S_START;
            quarter  <= '0;
            qcnt     <= QW'(QDIV - 1);
          end
        end

        // START and repeated START: SDA high, SCL high, SDA low, SCL low.
        S_START, S_RSTART: begin
          if (tick && !stretch) begin
            unique case (quarter)
              2'd0: sda_q <= 1'b1;
              2'd1: scl_q <= 1'b1;
              2'd2: sda_q <= 1'b0;
              2'd3: scl_q <= 1'b0;
            endcase
            begin
              qcnt    <= QW'(QDIV - 1);
              quarter <= quarter + 1'b1;
              if (quarter == 2'd3) begin
                state <= next_step(state, req_q.xfer);
                bitn  <= '0;
                shreg <= tx_byte(next_step(state, req_q.xfer), req_q);
              end
            end
          end
        end

        // STOP: SDA low, SCL high, SDA high, done.
        S_STOP: begin
          if (tick && !stretch) begin
            unique case (quarter)
              2'd0: sda_q <= 1'b0;
              2'd1: scl_q <= 1'b1;
              2'd2: sda_q <= 1'b1;
              2'd3: ;
            endcase
            begin
              qcnt    <= QW'(QDIV - 1);
              quarter <= quarter + 1'b1;
              if (quarter == 2'd3) state <= S_RESP;
            end
          end
        end

        S_RESP: begin
          if (rsp_ready) state <= S_IDLE;
        end

        // Byte steps: 8 data bits then the acknowledge bit.
        default: begin
          if (tick && !stretch) begin
            unique case (quarter)
              2'd0: begin
                if (bitn < 4'd8) sda_q <= is_tx(state) ? shreg[7] : 1'b1;
                else             sda_q <= is_tx(state) ? 1'b1 : last_rx;  // ACK=0, NACK=1
              end
              2'd1: scl_q <= 1'b1;
              2'd2: begin
                if (bitn < 4'd8) begin
                  shreg <= is_rx(state) ? {shreg[6:0], sda_in} : {shreg[6:0], 1'b1};
                end else if (is_tx(state) && sda_in) begin
                  status_q <= (state == S_ADDR_W || state == S_ADDR_R) ? PMB_ADDR_NACK
                                                                      : PMB_DATA_NACK;
                end
              end
              2'd3: scl_q <= 1'b0;
            endcase
            begin
              qcnt    <= QW'(QDIV - 1);
              quarter <= quarter + 1'b1;
              if (quarter == 2'd3) begin
                if (bitn < 4'd8) begin
                  bitn <= bitn + 1'b1;
                end else begin
                  bitn <= '0;
                  if (state == S_RDATA0) rdata_q[7:0]  <= shreg;
                  if (state == S_RDATA1) rdata_q[15:8] <= shreg;
                  if (status_q != PMB_OK) begin
                    state <= S_STOP;
                  end else begin
                    state <= next_step(state, req_q.xfer);
                    shreg <= tx_byte(next_step(state, req_q.xfer), req_q);
                  end
                end
              end
            end
          end
        end
      endcase
    end
  end

  assign req_ready     = (state == S_IDLE);
  assign rsp_valid     = (state == S_RESP);
  assign rsp_data      = '{status: status_q, data: rdata_q};
  assign scl_drive_low = !scl_q;
  assign sda_drive_low = !sda_q;
  assign busy          = (state != S_IDLE);

  // A response is held until it is taken.
  a_rsp_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp_data));
  // SDA only moves while SCL is low, except for START/STOP conditions.
  a_sda_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 (scl_q && $past(scl_q) && !(state inside {S_START, S_RSTART, S_STOP}))
                                 |-> $stable(sda_q));

endmodule
