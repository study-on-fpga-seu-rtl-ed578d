// bgo_fee_fpga: controlling FPGA of one calorimeter front-end-electronics
// (FEE) board, hardened against single-event upsets.
//
// Four parts, as on the board's block diagram:
//   control part          handles commands (control_part)
//   science data part     acquires and sends one event per trigger (sci_daq)
//   monitor part          engineering parameters (monitor_part)
//   status manager        long-lived registers and table RAM (status_manager)
// plus the command shifter (cmd_shifter) and the reset manager
// (reset_manager). Three upset mitigations work together:
//   multi-domain reset    the control and science parts are released from
//                         reset only for the duration of one procedure and
//                         reset by a watchdog if it hangs;
//   TMR with write-back   the long-lived registers are triplicated, voted
//                         and rewritten with the vote every cycle;
//   CRC                   the table RAM carries a CRC that is checked on
//                         every use; an error raises "alarm".
//
// Interface
//   cmd_bit/cmd_bit_vld   serial command input (40-bit frames, fee_pkg)
//   resp/resp_valid       one response word per handled command
//   trigger               trigger from the trigger board (one-cycle pulse)
//   adc_*                 per-channel sample request to the front-end ADC
//   sci_data/valid/ready  science packet word stream
//   va_cfg                value of va_cfgreg, to the front-end chips
//   tbl_data/tbl_valid    table words streamed out by a table use pass
//   hk_in/hk_sample       housekeeping word from the peripherals
//   alarm                 CRC error indicator (RAM needs reconfiguring)
//   soft_rstn, cmd_path_rstn, sci_path_rstn  the internal resets, for
//                         observation
// All logic runs on clk; hw_rstn is asynchronous, active low. The two path
// resets are both the reset manager's state (clocked) and the parts'
// asynchronous resets; they come straight from flip-flops, so they are
// glitch-free.
module bgo_fee_fpga
  import fee_pkg::*;
#(
  parameter int unsigned NCH             = 16,
  parameter int unsigned TBL_DEPTH       = 256,
  parameter int unsigned SOFT_RST_CYCLES = 16,
  parameter int unsigned CMD_TIMEOUT     = 1024,
  parameter int unsigned SCI_TIMEOUT     = 8192,
  parameter int unsigned MON_PERIOD      = 1024,
  localparam int unsigned CHW = (NCH > 1) ? $clog2(NCH) : 1
) (
  input  logic           clk,
  input  logic           hw_rstn,
  input  logic           cmd_bit,
  input  logic           cmd_bit_vld,
  output resp_t          resp,
  output logic           resp_valid,
  input  logic           trigger,
  output logic           adc_req,
  output logic [CHW-1:0] adc_ch,
  input  logic           adc_ack,
  input  logic [15:0]    adc_data,
  output logic [15:0]    sci_data,
  output logic           sci_valid,
  input  logic           sci_ready,
  output logic [15:0]    va_cfg,
  output logic [7:0]     tbl_data,
  output logic           tbl_valid,
  input  logic [15:0]    hk_in,
  output logic           hk_sample,
  output logic           alarm,
  output logic           soft_rstn,
  output logic           cmd_path_rstn,
  output logic           sci_path_rstn
);
  cmd_frame_t  frame;
  logic        frame_vld, soft_req;
  logic        cmd_done, sci_done, sci_accept, cmd_timeout, sci_timeout;
  logic        cfg_wr;
  logic [15:0] cfg_data;
  logic        tbl_wr_en, tbl_seal_req, tbl_use_req, tbl_busy, tbl_use_done, tbl_crc_err;
  logic [7:0]  tbl_wr_addr, tbl_wr_data;
  logic [7:0]  ctl_eng_idx, mon_eng_idx;
  logic [15:0] ctl_eng_word, mon_eng_word, trig_cnt;
  key_status_t status;

  cmd_shifter u_cmd_shifter (
    .clk, .hw_rstn, .bit_in(cmd_bit), .bit_vld(cmd_bit_vld),
    .frame, .frame_vld, .soft_req);

  reset_manager #(
    .SOFT_RST_CYCLES(SOFT_RST_CYCLES), .CMD_TIMEOUT(CMD_TIMEOUT), .SCI_TIMEOUT(SCI_TIMEOUT)
  ) u_reset_manager (
    .clk, .hw_rstn, .soft_req,
    .cmd_start(frame_vld), .cmd_done, .sci_start(trigger), .sci_done,
    .soft_rstn, .cmd_path_rstn, .sci_path_rstn,
    .cmd_accept(), .sci_accept, .cmd_timeout, .sci_timeout);

  control_part u_control (
    .clk, .rstn(cmd_path_rstn), .frame,
    .cfg_wr, .cfg_data,
    .tbl_wr_en, .tbl_wr_addr, .tbl_wr_data, .tbl_seal_req, .tbl_use_req,
    .tbl_busy, .tbl_use_done, .tbl_crc_err,
    .eng_idx(ctl_eng_idx), .eng_word(ctl_eng_word),
    .resp, .resp_valid, .done(cmd_done));

  sci_daq #(.NCH(NCH)) u_sci (
    .clk, .rstn(sci_path_rstn), .trig_no(trig_cnt),
    .adc_req, .adc_ch, .adc_ack, .adc_data,
    .sci_data, .sci_valid, .sci_ready, .done(sci_done));

  status_manager #(.TBL_DEPTH(TBL_DEPTH)) u_status (
    .clk, .rstn(soft_rstn),
    .cfg_wr, .cfg_data,
    .tbl_wr_en, .tbl_wr_addr, .tbl_wr_data, .tbl_seal_req, .tbl_use_req,
    .tbl_busy, .tbl_use_done, .tbl_crc_err, .tbl_data, .tbl_valid,
    .trig_accept(sci_accept), .cmd_timeout, .sci_timeout,
    .ctl_eng_idx, .ctl_eng_word, .mon_eng_idx, .mon_eng_word,
    .va_cfg, .trig_cnt, .status);

  monitor_part #(.MON_PERIOD(MON_PERIOD)) u_monitor (
    .clk, .rstn(soft_rstn), .hk_in, .status,
    .eng_idx(mon_eng_idx), .eng_word(mon_eng_word), .hk_sample, .alarm);
endmodule
