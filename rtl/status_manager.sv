// status_manager: keeper of the state that must survive between
// procedures.
//
// The control and science parts are reset after every procedure; what has
// to live longer is kept here, under the global (soft) reset only, and
// protected against upsets:
//   va_cfgreg    configuration register of the front-end chips, a TMR
//                register with write-back (tmr_reg), written by command
//   trig_cnt     trigger counter (TMR), advanced on every accepted trigger
//   cmd_to_cnt,  counters of command / science timeouts (TMR), i.e. of
//   sci_to_cnt   procedures that had to be broken by the watchdogs
//   table RAM    256-word table with a CRC at its end (crc_ram)
// It gathers these into key_status for the monitor part, and it is the
// control part's way to the monitor: an engineering parameter number from
// the control part goes through to the monitor and the word comes back
// (combinational, no delay).
//
// Timing: a register write or count is visible one cycle later.
//
// The paper names the status manager as the hub between the other three
// parts and describes the protection of the always-valid registers (TMR)
// and RAMs (CRC); which registers live here is this design's choice.
module status_manager
  import fee_pkg::*;
#(
  parameter int unsigned TBL_DEPTH = 256
) (
  input  logic        clk,
  input  logic        rstn,
  // from the control part
  input  logic        cfg_wr,
  input  logic [15:0] cfg_data,
  input  logic        tbl_wr_en,
  input  logic [7:0]  tbl_wr_addr,
  input  logic [7:0]  tbl_wr_data,
  input  logic        tbl_seal_req,
  input  logic        tbl_use_req,
  output logic        tbl_busy,
  output logic        tbl_use_done,
  output logic        tbl_crc_err,
  output logic [7:0]  tbl_data,
  output logic        tbl_valid,
  // events from the reset manager
  input  logic        trig_accept,
  input  logic        cmd_timeout,
  input  logic        sci_timeout,
  // to the science part and the peripherals
  output logic [15:0] va_cfg,
  output logic [15:0] trig_cnt,
  // engineering parameter read: control part <-> monitor part
  input  logic [7:0]  ctl_eng_idx,
  output logic [15:0] ctl_eng_word,
  output logic [7:0]  mon_eng_idx,
  input  logic [15:0] mon_eng_word,
  // to the monitor part
  output key_status_t status
);
  logic [7:0] cmd_to_cnt, sci_to_cnt;
  logic       tbl_sealed;

  tmr_reg #(.WIDTH(16)) u_va_cfgreg (
    .clk, .rstn, .select(cfg_wr), .d(cfg_data), .q(va_cfg));

  tmr_reg #(.WIDTH(16)) u_trig_cnt (
    .clk, .rstn, .select(trig_accept), .d(trig_cnt + 16'd1), .q(trig_cnt));

  tmr_reg #(.WIDTH(8)) u_cmd_to_cnt (
    .clk, .rstn, .select(cmd_timeout), .d(cmd_to_cnt + 8'd1), .q(cmd_to_cnt));

  tmr_reg #(.WIDTH(8)) u_sci_to_cnt (
    .clk, .rstn, .select(sci_timeout), .d(sci_to_cnt + 8'd1), .q(sci_to_cnt));

  crc_ram #(.DEPTH(TBL_DEPTH), .DW(8)) u_table (
    .clk, .rstn,
    .wr_en(tbl_wr_en), .wr_addr(tbl_wr_addr[$clog2(TBL_DEPTH)-1:0]), .wr_data(tbl_wr_data),
    .seal_req(tbl_seal_req), .use_req(tbl_use_req),
    .use_data(tbl_data), .use_valid(tbl_valid), .use_done(tbl_use_done),
    .busy(tbl_busy), .sealed(tbl_sealed), .crc_err(tbl_crc_err));

  // The control part reaches the monitor's engineering words only through
  // this block, as the four-part structure has no direct path between them.
  assign mon_eng_idx  = ctl_eng_idx;
  assign ctl_eng_word = mon_eng_word;

  always_comb begin
    status.va_cfg     = va_cfg;
    status.crc_err    = tbl_crc_err;
    status.tbl_sealed = tbl_sealed;
    status.trig_cnt   = trig_cnt;
    status.cmd_to_cnt = cmd_to_cnt;
    status.sci_to_cnt = sci_to_cnt;
  end
endmodule
