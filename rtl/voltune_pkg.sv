// voltune_pkg - types and constants shared by the VolTune hardware control path.
//
// VolTune opcodes are the internal command identifiers that a requester sends
// to the PowerManager; PMBus commands are the standard command bytes the
// PMBus module puts on the wire. The opcode values 0x0..0x5 and the PMBus
// command codes are those of the published opcode and command tables. Opcode
// 0x6 (current telemetry, READ_IOUT) is this design's own addition: the
// command table lists READ_IOUT for telemetry readback but no opcode for it.
//
// Three stream payloads are defined here:
//   vt_cmd_t     requester -> PowerManager   (opcode, lane, value)
//   vt_ack_t     PowerManager -> requester   (status, echo, raw word, value)
//   pmbus_req_t  PowerManager -> PMBus module (transaction type, addr, cmd, data)
//   pmbus_rsp_t  PMBus module -> PowerManager (status, read data)
// Field widths, the millivolt/milliamp units of "value" and the status codes
// are this design's choices.
package voltune_pkg;

  // ---------------------------------------------------------------- opcodes
  typedef enum logic [3:0] {
    OP_CLEAR_STATUS = 4'h0,  // controller-internal reset, no PMBus traffic
    OP_SET_UV       = 4'h1,  // VOUT_UV_WARN_LIMIT + VOUT_UV_FAULT_LIMIT
    OP_SET_PG_ON    = 4'h2,  // POWER_GOOD_ON
    OP_SET_PG_OFF   = 4'h3,  // POWER_GOOD_OFF
    OP_SET_VOLTAGE  = 4'h4,  // VOUT_COMMAND
    OP_GET_VOLTAGE  = 4'h5,  // READ_VOUT
    OP_GET_CURRENT  = 4'h6   // READ_IOUT (this design's addition)
  } vt_opcode_e;

  // ---------------------------------------------------------- PMBus commands
  localparam logic [7:0] PMB_PAGE               = 8'h00;
  localparam logic [7:0] PMB_CLEAR_FAULTS       = 8'h03;
  localparam logic [7:0] PMB_VOUT_COMMAND       = 8'h21;
  localparam logic [7:0] PMB_VOUT_UV_WARN_LIMIT = 8'h43;
  localparam logic [7:0] PMB_VOUT_UV_FAULT_LIMIT= 8'h44;
  localparam logic [7:0] PMB_POWER_GOOD_ON      = 8'h5E;
  localparam logic [7:0] PMB_POWER_GOOD_OFF     = 8'h5F;
  localparam logic [7:0] PMB_READ_VOUT          = 8'h8B;
  localparam logic [7:0] PMB_READ_IOUT          = 8'h8C;

  // Number of lanes in the KC705 rail map.
  localparam int unsigned NUM_LANES = 11;

  // ------------------------------------------------ PMBus transaction types
  typedef enum logic [2:0] {
    XFER_SEND_BYTE  = 3'd0,  // S addr+W A cmd A P
    XFER_WRITE_BYTE = 3'd1,  // S addr+W A cmd A d0 A P
    XFER_WRITE_WORD = 3'd2,  // S addr+W A cmd A d[7:0] A d[15:8] A P
    XFER_READ_BYTE  = 3'd3,  // S addr+W A cmd A Sr addr+R A d NA P
    XFER_READ_WORD  = 3'd4   // S addr+W A cmd A Sr addr+R A d[7:0] A d[15:8] NA P
  } pmbus_xfer_e;

  typedef enum logic [1:0] {
    PMB_OK         = 2'd0,
    PMB_ADDR_NACK  = 2'd1,   // no device acknowledged an address byte
    PMB_DATA_NACK  = 2'd2    // the device refused a command or data byte
  } pmbus_status_e;

  typedef struct packed {
    pmbus_xfer_e xfer;
    logic [6:0]  addr;
    logic [7:0]  cmd;
    logic [15:0] data;       // write payload; byte writes use data[7:0]
  } pmbus_req_t;

  typedef struct packed {
    pmbus_status_e status;
    logic [15:0]   data;     // read payload; byte reads return {8'h00, d}
  } pmbus_rsp_t;

  // ------------------------------------------------ VolTune command / ack
  typedef enum logic [3:0] {
    VT_OK         = 4'h0,
    VT_PMBUS_NACK = 4'h1,    // the PMBus module reported a NACK
    VT_BAD_LANE   = 4'h2,    // lane outside the rail map
    VT_BAD_OPCODE = 4'h3     // opcode not implemented
  } vt_status_e;

  typedef struct packed {
    logic [3:0]  opcode;
    logic [3:0]  lane;
    logic [7:0]  rsvd;
    logic [15:0] value;      // millivolts for the voltage opcodes
  } vt_cmd_t;

  typedef struct packed {
    vt_status_e  status;
    logic [3:0]  opcode;     // echo of the request
    logic [3:0]  lane;       // echo of the request
    logic [3:0]  rsvd;
    logic [15:0] raw;        // PMBus word written or read
    logic [15:0] value;      // millivolts (voltage) or milliamps (current)
  } vt_ack_t;

endpackage
