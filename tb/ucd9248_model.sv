// ucd9248_model - behavioural model of the board's UCD9248 power controllers,
// for simulation only.
//
// Stands in for the three UCD9248 devices of the KC705 (7-bit addresses
// BASE_ADDR .. BASE_ADDR+NUM_DEV-1), each with four PAGEs. It is a PMBus slave
// clocked by the system clock: it samples SCL and SDA every cycle, detects
// START/STOP on SDA edges while SCL is high, takes bits on SCL rising edges and
// changes its SDA drive on SCL falling edges.
//
// Registers per (device, page): VOUT_COMMAND, VOUT_UV_WARN_LIMIT,
// VOUT_UV_FAULT_LIMIT, POWER_GOOD_ON, POWER_GOOD_OFF (LINEAR16 words); PAGE
// per device; READ_VOUT returns the modelled output, READ_IOUT a fixed
// LINEAR11 current (IOUT_L11). CLEAR_FAULTS is accepted as a Send Byte. Any
// other command byte is refused with a NACK.
//
// The output voltage does not jump: once VOUT_COMMAND changes, it moves one
// LINEAR16 step (1/4096 V) toward the new set-point every SLEW_CYCLES clock
// cycles, so larger steps take longer, as a real regulator does.
// With stretch_en high the model holds SCL low for STRETCH_CYCLES after each
// address acknowledge (clock stretching).
//
// Every committed write and every read is appended to a log (log_*), which
// testbenches compare against the expected PMBus sequence.
module ucd9248_model #(
  parameter int unsigned BASE_ADDR      = 52,
  parameter int unsigned NUM_DEV        = 3,
  parameter int unsigned SLEW_CYCLES    = 100,
  parameter int unsigned STRETCH_CYCLES = 300,
  parameter logic [15:0] VOUT_INIT      = 16'd4096,   // 1.000 V
  parameter logic [15:0] IOUT_L11       = 16'hD280,   // 2^-6 * 640 = 10.000 A
  parameter int unsigned LOG_DEPTH      = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic scl,            // line levels (wired-AND of all drivers)
  input  logic sda,
  output logic scl_drive_low,
  output logic sda_drive_low,
  input  logic stretch_en
);

  typedef enum logic [2:0] {M_IDLE, M_RX, M_RX_ACK, M_TX, M_TX_ACK} mstate_e;

  localparam int unsigned NP = NUM_DEV * 4;

  logic [15:0] vout_cmd [NP];
  logic [15:0] vout_now [NP];
  logic [15:0] uv_warn  [NP];
  logic [15:0] uv_fault [NP];
  logic [15:0] pg_on    [NP];
  logic [15:0] pg_off   [NP];
  logic [1:0]  page     [NUM_DEV];

  // transaction log
  logic [6:0]  log_addr [LOG_DEPTH];
  logic [7:0]  log_cmd  [LOG_DEPTH];
  logic [15:0] log_data [LOG_DEPTH];
  logic        log_rd   [LOG_DEPTH];
  longint      log_time [LOG_DEPTH];  // clock cycle of the commit
  longint      cyc = 0;
  int unsigned log_n = 0;
  int unsigned stretch_count;
  int unsigned clear_faults_count;

  mstate_e     st;
  logic        scl_d, sda_d;
  logic [3:0]  bitc;
  logic [7:0]  shift;
  int unsigned byte_idx;
  int unsigned dev;
  logic        rw, more, match;
  logic [7:0]  cmd;
  logic [7:0]  lo;
  logic [15:0] txword;
  logic [7:0]  txbyte;
  int unsigned stretch_left;
  int unsigned slew_cnt;

  wire scl_rise = scl && !scl_d;
  wire scl_fall = !scl && scl_d;
  wire start_c  = scl && scl_d && sda_d && !sda;
  wire stop_c   = scl && scl_d && !sda_d && sda;

  function automatic int unsigned idx(int unsigned d);
    return d * 4 + int'(page[d]);
  endfunction

  function automatic logic supported(logic [7:0] c);
    return c inside {8'h00, 8'h03, 8'h21, 8'h43, 8'h44, 8'h5E, 8'h5F, 8'h8B, 8'h8C};
  endfunction

  function automatic logic [15:0] read_reg(int unsigned d, logic [7:0] c);
    int unsigned i = idx(d);
    case (c)
      8'h00:   return {14'd0, page[d]};
      8'h21:   return vout_cmd[i];
      8'h43:   return uv_warn[i];
      8'h44:   return uv_fault[i];
      8'h5E:   return pg_on[i];
      8'h5F:   return pg_off[i];
      8'h8B:   return vout_now[i];
      8'h8C:   return IOUT_L11;
      default: return 16'hFFFF;
    endcase
  endfunction

  task automatic add_log(int unsigned d, logic [7:0] c, logic [15:0] v, logic r);
    if (log_n < LOG_DEPTH) begin
      log_addr[log_n] = 7'(BASE_ADDR + d);
      log_cmd[log_n]  = c;
      log_data[log_n] = v;
      log_rd[log_n]   = r;
      log_time[log_n] = cyc;
    end
    log_n++;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; scl_d <= 1'b1; sda_d <= 1'b1;
      bitc <= '0; shift <= '0; byte_idx <= 0; dev <= 0; rw <= 1'b0; more <= 1'b0;
      match <= 1'b0; cmd <= '0; lo <= '0; txword <= '0; txbyte <= '0;
      sda_drive_low <= 1'b0; scl_drive_low <= 1'b0;
      stretch_left <= 0; slew_cnt <= 0;
      stretch_count <= 0; clear_faults_count <= 0;
      for (int i = 0; i < NP; i++) begin
        vout_cmd[i] <= VOUT_INIT; vout_now[i] <= VOUT_INIT;
        uv_warn[i] <= '0; uv_fault[i] <= '0; pg_on[i] <= '0; pg_off[i] <= '0;
      end
      for (int d = 0; d < NUM_DEV; d++) page[d] <= '0;
    end else begin
      cyc = cyc + 1;
      scl_d <= scl;
      sda_d <= sda;

      // regulator output slews toward its set-point
      if (slew_cnt >= SLEW_CYCLES - 1) begin
        slew_cnt <= 0;
        for (int i = 0; i < NP; i++) begin
          if (vout_now[i] < vout_cmd[i])      vout_now[i] <= vout_now[i] + 16'd1;
          else if (vout_now[i] > vout_cmd[i]) vout_now[i] <= vout_now[i] - 16'd1;
        end
      end else begin
        slew_cnt <= slew_cnt + 1;
      end

      // clock stretching
      if (stretch_left != 0) begin
        stretch_left <= stretch_left - 1;
        if (stretch_left == 1) scl_drive_low <= 1'b0;
      end

      if (start_c) begin
        st <= M_RX; bitc <= '0; byte_idx <= 0; sda_drive_low <= 1'b0;
      end else if (stop_c) begin
        if (match && !rw && byte_idx == 2 && cmd == 8'h03) clear_faults_count <= clear_faults_count + 1;
        st <= M_IDLE; sda_drive_low <= 1'b0; match <= 1'b0;
      end else begin
        unique case (st)
          M_IDLE: ;
          M_RX: begin
            if (scl_rise) begin
              shift <= {shift[6:0], sda};
              bitc  <= bitc + 1'b1;
            end else if (scl_fall && bitc == 4'd8) begin
              st <= M_RX_ACK;
              if (byte_idx == 0) begin
                // address byte
                if (shift[7:1] >= 7'(BASE_ADDR) && shift[7:1] < 7'(BASE_ADDR + NUM_DEV)) begin
                  match         <= 1'b1;
                  dev           <= int'(shift[7:1]) - BASE_ADDR;
                  rw            <= shift[0];
                  sda_drive_low <= 1'b1;
                  if (stretch_en) begin
                    scl_drive_low <= 1'b1;
                    stretch_left  <= STRETCH_CYCLES;
                    stretch_count <= stretch_count + 1;
                  end
                end else begin
                  match <= 1'b0;
                  st    <= M_IDLE;
                end
              end else if (byte_idx == 1) begin
                cmd <= shift;
                if (supported(shift)) sda_drive_low <= 1'b1;
                else begin
                  match <= 1'b0;
                  st    <= M_IDLE;
                end
              end else begin
                sda_drive_low <= 1'b1;
                if (byte_idx == 2) begin
                  lo <= shift;
                  if (cmd == 8'h00) begin
                    page[dev] <= shift[1:0];
                    add_log(dev, cmd, {8'h00, shift}, 1'b0);
                  end
                end else if (byte_idx == 3) begin
                  add_log(dev, cmd, {shift, lo}, 1'b0);
                  case (cmd)
                    8'h21: vout_cmd[idx(dev)] <= {shift, lo};
                    8'h43: uv_warn[idx(dev)]  <= {shift, lo};
                    8'h44: uv_fault[idx(dev)] <= {shift, lo};
                    8'h5E: pg_on[idx(dev)]    <= {shift, lo};
                    8'h5F: pg_off[idx(dev)]   <= {shift, lo};
                    default: ;
                  endcase
                end
              end
              byte_idx <= byte_idx + 1;
            end
          end
          M_RX_ACK: begin
            if (scl_fall) begin
              bitc <= '0;
              if (rw) begin
                logic [15:0] w;
                w = read_reg(dev, cmd);
                add_log(dev, cmd, w, 1'b1);
                txbyte        <= w[7:0];
                txword        <= w;
                sda_drive_low <= !w[7];
                st            <= M_TX;
              end else begin
                sda_drive_low <= 1'b0;
                st            <= M_RX;
              end
            end
          end
          M_TX: begin
            if (scl_rise) begin
              bitc <= bitc + 1'b1;
            end else if (scl_fall) begin
              if (bitc == 4'd8) begin
                sda_drive_low <= 1'b0;
                st            <= M_TX_ACK;
              end else begin
                sda_drive_low <= !txbyte[3'd7 - 3'(bitc)];
              end
            end
          end
          M_TX_ACK: begin
            if (scl_rise) more <= !sda;
            else if (scl_fall) begin
              bitc <= '0;
              if (more) begin
                txbyte        <= txword[15:8];
                sda_drive_low <= !txword[15];
                st            <= M_TX;
              end else begin
                sda_drive_low <= 1'b0;
                st            <= M_IDLE;
              end
            end
          end
          default: st <= M_IDLE;
        endcase
      end
    end
  end

endmodule
