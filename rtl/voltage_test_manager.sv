// voltage_test_manager - requester side of VolTune: runs a voltage-transition
// measurement and records the rail's response.
//
// A host programs the registers below over AXI4-Lite (on the prototype this
// path comes from a JTAG-to-AXI bridge), writes RUN, polls STATUS until DONE,
// then reads the sample buffer. RUN executes the prototype measurement
// sequence as a series of VolTune commands to the PowerManager, each one
// waiting for the previous acknowledge:
//
//   Clear Status -> Set Under Voltage(UV) -> Set Power Good On(PG_ON) ->
//   Set Power Good Off(PG_OFF) -> Set Voltage(INIT) -> wait WAIT_CYCLES ->
//   Get Voltage (kept in INIT_READBACK) -> Set Voltage(TARGET) ->
//   Get Voltage repeated until NUM_SAMPLES samples are in the buffer
//
// With SAMPLE_CURRENT set in the RUN write, the loop issues Get Current
// instead, giving periodic READ_IOUT telemetry (value in mA) after the step.
//
// Each sample holds the voltage read back (mV and raw LINEAR16) and the time
// at which its acknowledge arrived, in counter ticks since the Set Voltage
// (TARGET) command was issued. Any acknowledge other than OK stops the run
// with ERROR set. A single command can also be sent by writing DIRECT_CMD
// while idle; its acknowledge lands in DIRECT_ACK_LO/HI.
//
// Register map (32-bit, byte addresses; full-word writes, WSTRB ignored):
//   0x00 CTRL          W  bit0 RUN (starts the sequence when idle),
//                         bit1 SAMPLE_CURRENT (the loop reads current)
//   0x04 STATUS        R  bit0 BUSY, bit1 DONE, bit2 ERROR, [11:8] last ack
//                         status, [15:12] last ack opcode, [31:16] samples
//   0x08 LANE          RW [3:0]
//   0x0C UV_MV         RW [15:0]   under-voltage warn/fault threshold
//   0x10 PG_ON_MV      RW [15:0]
//   0x14 PG_OFF_MV     RW [15:0]
//   0x18 INIT_MV       RW [15:0]   initial voltage
//   0x1C TARGET_MV     RW [15:0]   target voltage
//   0x20 WAIT_CYCLES   RW          delay after the initial setting
//   0x24 INIT_READBACK R  {raw, mV} read before the target is applied
//   0x28 BUF_INDEX     RW          sample to read
//   0x2C BUF_VOLT      R  {raw, mV} of sample BUF_INDEX
//   0x30 BUF_TIME      R  time stamp of sample BUF_INDEX
//   0x34 DIRECT_CMD    RW vt_cmd_t {opcode, lane, 8'h0, value}; a write issues it
//   0x38 DIRECT_ACK_LO R  {raw, value} of the last acknowledge
//   0x3C DIRECT_ACK_HI R  {16'h0, status, opcode, lane, rsvd}
//   0x40 NUM_SAMPLES   RW samples per run, 1..DEPTH (default DEPTH)
//   0x44 T_ACK         R  ticks from issuing Set Voltage(TARGET) to its ack
//   0x48 DEPTH         R  buffer depth
//
// What follows the paper: the command order of the prototype measurement
// sequence, the 0.1 ms wait (10,000 cycles at 100 MHz), sampling until the
// buffer is full, host polling and buffer read-out, AXI-Lite register access
// and the counter time base. The register map, the buffer depth of 256 and
// the time-stamp format are this design's. The buffer is a simple dual-port
// memory (one write port, one registered read port) so it maps to block RAM.
//
// Timing: AXI-Lite writes complete in one cycle after AW and W are both
// valid; reads return data the cycle after AR. Buffer reads see BUF_INDEX
// one cycle after it is written.
//
// s_axi_bresp and s_axi_rresp are always OKAY: every address answers, unknown
// ones read as zero and ignore writes.
module voltage_test_manager
  import voltune_pkg::*;
#(
  parameter int unsigned DEPTH        = 256,
  parameter int unsigned WAIT_DEFAULT = 10_000,   // 0.1 ms at 100 MHz
  parameter int unsigned ADDR_W       = 8,
  parameter int unsigned TS_W         = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  // time base from the counter
  input  logic              ts_tvalid,
  input  logic [TS_W-1:0]   ts_tdata,
  // command / acknowledge streams to the PowerManager
  output logic              cmd_valid,
  input  logic              cmd_ready,
  output vt_cmd_t           cmd_data,
  input  logic              ack_valid,
  output logic              ack_ready,
  input  vt_ack_t           ack_data,
  // status
  output logic              busy,
  output logic              done
);

  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  typedef enum logic [3:0] {
    SQ_CLEAR, SQ_UV, SQ_PGON, SQ_PGOFF, SQ_INIT, SQ_DELAY, SQ_GETINIT,
    SQ_TARGET, SQ_SAMPLE, SQ_DIRECT
  } seq_e;
  typedef enum logic [1:0] {V_IDLE, V_ISSUE, V_WAITACK, V_DELAY} vstate_e;

  // ------------------------------------------------------------ registers
  logic [3:0]  lane_r;
  logic [15:0] uv_r, pgon_r, pgoff_r, init_r, target_r;
  logic [31:0] wait_r;
  logic [31:0] init_rb_r;
  logic [31:0] buf_index_r;
  vt_cmd_t     direct_r;
  vt_ack_t     last_ack_r;
  logic [CW-1:0] num_samples_r;
  logic [TS_W-1:0] t_ack_r;
  logic        done_r, error_r;
  logic        sample_cur_r;    // sampling loop reads current instead of voltage

  // ------------------------------------------------------------ sequencer
  vstate_e         vst;
  seq_e            seq;
  logic [31:0]     delay_cnt;
  logic [CW-1:0]   nsamp;
  logic [TS_W-1:0] t0;

  // sample buffer: {raw, mV, time}
  logic [32+TS_W-1:0] buf_mem [DEPTH];
  logic [32+TS_W-1:0] buf_rd_q;

  // ------------------------------------------------------------ AXI-Lite
  logic wr_en, rd_en;
  assign wr_en         = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_awready = wr_en;
  assign s_axi_wready  = wr_en;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;
  assign rd_en         = s_axi_arvalid && !s_axi_rvalid;
  assign s_axi_arready = !s_axi_rvalid;

  wire [ADDR_W-1:0] waddr = {s_axi_awaddr[ADDR_W-1:2], 2'b00};
  wire [ADDR_W-1:0] raddr = {s_axi_araddr[ADDR_W-1:2], 2'b00};
  wire              idle  = (vst == V_IDLE);
  wire              run_req    = wr_en && waddr == ADDR_W'(8'h00) && s_axi_wdata[0] && idle;
  wire              direct_req = wr_en && waddr == ADDR_W'(8'h34) && idle;

  // read mux
  logic [31:0] rmux;
  always_comb begin
    unique case (raddr)
      ADDR_W'(8'h04): rmux = {16'(nsamp), last_ack_r.opcode, last_ack_r.status,
                              5'd0, error_r, done_r, !idle};
      ADDR_W'(8'h08): rmux = {28'd0, lane_r};
      ADDR_W'(8'h0C): rmux = {16'd0, uv_r};
      ADDR_W'(8'h10): rmux = {16'd0, pgon_r};
      ADDR_W'(8'h14): rmux = {16'd0, pgoff_r};
      ADDR_W'(8'h18): rmux = {16'd0, init_r};
      ADDR_W'(8'h1C): rmux = {16'd0, target_r};
      ADDR_W'(8'h20): rmux = wait_r;
      ADDR_W'(8'h24): rmux = init_rb_r;
      ADDR_W'(8'h28): rmux = buf_index_r;
      ADDR_W'(8'h2C): rmux = buf_rd_q[32+TS_W-1:TS_W];
      ADDR_W'(8'h30): rmux = 32'(buf_rd_q[TS_W-1:0]);
      ADDR_W'(8'h34): rmux = direct_r;
      ADDR_W'(8'h38): rmux = {last_ack_r.raw, last_ack_r.value};
      ADDR_W'(8'h3C): rmux = {16'd0, last_ack_r.status, last_ack_r.opcode,
                              last_ack_r.lane, last_ack_r.rsvd};
      ADDR_W'(8'h40): rmux = 32'(num_samples_r);
      ADDR_W'(8'h44): rmux = 32'(t_ack_r);
      ADDR_W'(8'h48): rmux = 32'(DEPTH);
      default:        rmux = 32'd0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      if (wr_en)                             s_axi_bvalid <= 1'b1;
      else if (s_axi_bready)                 s_axi_bvalid <= 1'b0;
      if (rd_en) begin
        s_axi_rvalid <= 1'b1;
        s_axi_rdata  <= rmux;
      end else if (s_axi_rready)             s_axi_rvalid <= 1'b0;
    end
  end

  // ------------------------------------------------------------ command out
  always_comb begin
    cmd_data = '{opcode: OP_GET_VOLTAGE, lane: lane_r, rsvd: '0, value: '0};
    unique case (seq)
      SQ_CLEAR:  cmd_data.opcode = OP_CLEAR_STATUS;
      SQ_UV:     begin cmd_data.opcode = OP_SET_UV;      cmd_data.value = uv_r;     end
      SQ_PGON:   begin cmd_data.opcode = OP_SET_PG_ON;   cmd_data.value = pgon_r;   end
      SQ_PGOFF:  begin cmd_data.opcode = OP_SET_PG_OFF;  cmd_data.value = pgoff_r;  end
      SQ_INIT:   begin cmd_data.opcode = OP_SET_VOLTAGE; cmd_data.value = init_r;   end
      SQ_TARGET: begin cmd_data.opcode = OP_SET_VOLTAGE; cmd_data.value = target_r; end
      SQ_SAMPLE: if (sample_cur_r) cmd_data.opcode = OP_GET_CURRENT;
      SQ_DIRECT: cmd_data = direct_r;
      default:   ;
    endcase
  end
  assign cmd_valid = (vst == V_ISSUE);
  assign ack_ready = (vst == V_WAITACK);

  // ------------------------------------------------------------ main FSM
  wire [TS_W-1:0] now = ts_tdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lane_r        <= 4'd6;          // MGTAVCC
      uv_r          <= '0;
      pgon_r        <= '0;
      pgoff_r       <= '0;
      init_r        <= 16'd1000;
      target_r      <= 16'd1000;
      wait_r        <= WAIT_DEFAULT;
      init_rb_r     <= '0;
      buf_index_r   <= '0;
      direct_r      <= '0;
      last_ack_r    <= '0;
      num_samples_r <= CW'(DEPTH);
      t_ack_r       <= '0;
      done_r        <= 1'b0;
      error_r       <= 1'b0;
      sample_cur_r  <= 1'b0;
      vst           <= V_IDLE;
      seq           <= SQ_CLEAR;
      delay_cnt     <= '0;
      nsamp         <= '0;
      t0            <= '0;
    end else begin
      // register writes (configuration only while idle)
      if (wr_en && idle) begin
        unique case (waddr)
          ADDR_W'(8'h08): lane_r        <= s_axi_wdata[3:0];
          ADDR_W'(8'h0C): uv_r          <= s_axi_wdata[15:0];
          ADDR_W'(8'h10): pgon_r        <= s_axi_wdata[15:0];
          ADDR_W'(8'h14): pgoff_r       <= s_axi_wdata[15:0];
          ADDR_W'(8'h18): init_r        <= s_axi_wdata[15:0];
          ADDR_W'(8'h1C): target_r      <= s_axi_wdata[15:0];
          ADDR_W'(8'h20): wait_r        <= s_axi_wdata;
          ADDR_W'(8'h34): direct_r      <= s_axi_wdata;
          ADDR_W'(8'h40): num_samples_r <= (s_axi_wdata == 0) ? CW'(1) :
                                           (s_axi_wdata > DEPTH) ? CW'(DEPTH) : CW'(s_axi_wdata);
          default: ;
        endcase
      end
      if (wr_en && waddr == ADDR_W'(8'h28)) buf_index_r <= s_axi_wdata;

      unique case (vst)
        V_IDLE: begin
          if (run_req) begin
            done_r  <= 1'b0;
            error_r <= 1'b0;
            nsamp   <= '0;
            sample_cur_r <= s_axi_wdata[1];
            seq     <= SQ_CLEAR;
            vst     <= V_ISSUE;
          end else if (direct_req) begin
            seq     <= SQ_DIRECT;
            vst     <= V_ISSUE;
          end
        end

        V_ISSUE: if (cmd_ready) begin
          if (seq == SQ_TARGET) t0 <= now;
          vst <= V_WAITACK;
        end

        V_WAITACK: if (ack_valid) begin
          last_ack_r <= ack_data;
          vst        <= V_ISSUE;
          if (ack_data.status != VT_OK) begin
            error_r <= (seq != SQ_DIRECT);
            done_r  <= (seq != SQ_DIRECT);
            vst     <= V_IDLE;
          end else begin
            unique case (seq)
              SQ_CLEAR:   seq <= SQ_UV;
              SQ_UV:      seq <= SQ_PGON;
              SQ_PGON:    seq <= SQ_PGOFF;
              SQ_PGOFF:   seq <= SQ_INIT;
              SQ_INIT: begin
                seq       <= SQ_DELAY;
                delay_cnt <= wait_r;
                vst       <= V_DELAY;
              end
              SQ_GETINIT: begin
                init_rb_r <= {ack_data.raw, ack_data.value};
                seq       <= SQ_TARGET;
              end
              SQ_TARGET: begin
                t_ack_r <= now - t0;
                seq     <= SQ_SAMPLE;
              end
              SQ_SAMPLE: begin
                nsamp <= nsamp + 1'b1;
                if (nsamp + 1'b1 >= num_samples_r) begin
                  done_r <= 1'b1;
                  vst    <= V_IDLE;
                end
              end
              default: vst <= V_IDLE;    // SQ_DIRECT
            endcase
          end
        end

        V_DELAY: begin
          if (delay_cnt <= 1) begin
            seq <= SQ_GETINIT;
            vst <= V_ISSUE;
          end else begin
            delay_cnt <= delay_cnt - 1'b1;
          end
        end

        default: vst <= V_IDLE;
      endcase
    end
  end

  // sample buffer write and registered read
  always_ff @(posedge clk) begin
    if (vst == V_WAITACK && ack_valid && seq == SQ_SAMPLE && ack_data.status == VT_OK)
      buf_mem[IW'(nsamp)] <= {ack_data.raw, ack_data.value, now - t0};
    buf_rd_q <= buf_mem[IW'(buf_index_r)];
  end

  assign busy = !idle;
  assign done = done_r;

  // AXI-Lite and stream rules
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));
  a_cmd_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd_data));

  logic unused;
  assign unused = ^{s_axi_wstrb, ts_tvalid, s_axi_awaddr[1:0], s_axi_araddr[1:0]};

endmodule
