// fee_pkg: types and constants shared by the BGO front-end-electronics (FEE)
// controller FPGA.
//
// It holds the command frame layout, the command opcodes, the response
// status codes, the science packet header and the CRC-16 routine used by
// the CRC-protected RAM. None of these encodings are published with the
// design this RTL follows; all of them are this design's own choice and
// are kept in one place so that they can be changed together.
package fee_pkg;

  // ---------------------------------------------------------------- commands
  // A command arrives bit-serially, MSB first, as a 40-bit frame:
  //   [39:32] sync byte, [31:24] opcode, [23:8] argument, [7:0] checksum
  // checksum = opcode ^ arg[15:8] ^ arg[7:0].
  localparam int unsigned FRAME_BITS = 40;
  localparam logic [7:0]  CMD_SYNC   = 8'hEB;

  typedef enum logic [7:0] {
    OP_WR_CFG   = 8'h01,  // write va_cfgreg with arg
    OP_WR_TBL   = 8'h02,  // write table RAM: arg = {addr[7:0], data[7:0]}
    OP_SEAL_TBL = 8'h03,  // compute the table CRC and store it at the RAM end
    OP_USE_TBL  = 8'h04,  // stream the table out, re-check its CRC
    OP_RD_ENG   = 8'h05,  // read engineering parameter number arg[7:0]
    OP_RESET    = 8'hA5   // soft reset (handled by the command shifter)
  } cmd_op_e;

  // Argument the reset command must carry (guards against a corrupted frame).
  localparam logic [15:0] RESET_KEY = 16'h5AA5;

  typedef struct packed {
    logic [7:0]  sync;
    logic [7:0]  op;
    logic [15:0] arg;
    logic [7:0]  chk;
  } cmd_frame_t;

  function automatic logic [7:0] frame_checksum(logic [7:0] op, logic [15:0] arg);
    return op ^ arg[15:8] ^ arg[7:0];
  endfunction

  // States of the command handling procedure (control_part).
  typedef enum logic [2:0] {S_ANALYSE, S_EXEC, S_WAIT, S_RESP, S_DONE} ctrl_state_e;

  // ---------------------------------------------------------------- responses
  typedef enum logic [7:0] {
    ST_OK        = 8'h00,
    ST_BAD_CHK   = 8'h01,
    ST_BAD_OP    = 8'h02,
    ST_CRC_ERR   = 8'h03
  } resp_status_e;

  // Response word: {opcode, status, value}
  typedef struct packed {
    logic [7:0]  op;
    logic [7:0]  status;
    logic [15:0] value;
  } resp_t;

  // ---------------------------------------------------------------- science
  localparam logic [15:0] SCI_HEADER = 16'hEB90;

  // ---------------------------------------------------------------- monitor
  // Engineering parameter numbers (index of OP_RD_ENG).
  localparam int unsigned ENG_VA_CFG   = 0;
  localparam int unsigned ENG_CRC_FLAG = 1;
  localparam int unsigned ENG_TRIG_CNT = 2;
  localparam int unsigned ENG_TIMEOUTS = 3;
  localparam int unsigned ENG_HK       = 4;
  localparam int unsigned ENG_WORDS    = 5;

  // Key status that the status manager hands to the monitor part.
  typedef struct packed {
    logic [15:0] va_cfg;
    logic        crc_err;
    logic        tbl_sealed;
    logic [15:0] trig_cnt;
    logic [7:0]  cmd_to_cnt;
    logic [7:0]  sci_to_cnt;
  } key_status_t;

  // ---------------------------------------------------------------- CRC
  // CRC-16/CCITT (x^16 + x^12 + x^5 + 1, initial value 16'hFFFF),
  // one byte, MSB first.
  localparam logic [15:0] CRC_INIT = 16'hFFFF;

  function automatic logic [15:0] crc16_byte(logic [15:0] crc, logic [7:0] data);
    logic [15:0] c;
    c = crc;
    for (int i = 7; i >= 0; i--) begin
      if (c[15] ^ data[i]) c = {c[14:0], 1'b0} ^ 16'h1021;
      else                 c = {c[14:0], 1'b0};
    end
    return c;
  endfunction

endpackage
