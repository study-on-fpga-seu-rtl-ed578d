// monitor_part: engineering parameter monitor.
//
// Keeps a table of ENG_WORDS engineering parameter words that can be read
// at any time by number (eng_idx -> eng_word, combinational):
//   0 va_cfgreg value            1 {.., tbl_sealed, crc_err}
//   2 trigger counter            3 {command timeouts, science timeouts}
//   4 peripheral housekeeping word
// The key-register words are refreshed from the status manager every
// cycle, so they are watched continuously. The housekeeping word from the
// peripheral devices is sampled every MON_PERIOD cycles (hk_sample pulses
// when it is), which models a slow housekeeping readout.
// The block also raises "alarm" while the CRC error indicator is set, the
// call for reconfiguring the RAM.
//
// Timing: a change of a key register shows in the table one cycle later.
//
// The paper names the monitor part and says that the key registers and the
// CRC indicator bit are monitored as engineering parameters; the word map,
// the sampling period and the alarm output are this design's own.
module monitor_part
  import fee_pkg::*;
#(
  parameter int unsigned MON_PERIOD = 1024
) (
  input  logic        clk,
  input  logic        rstn,
  input  logic [15:0] hk_in,
  input  key_status_t status,
  input  logic [7:0]  eng_idx,
  output logic [15:0] eng_word,
  output logic        hk_sample,
  output logic        alarm
);
  localparam int unsigned PW = $clog2(MON_PERIOD + 1);

  logic [15:0] eng [ENG_WORDS];
  logic [PW-1:0] tick;

  always_ff @(posedge clk or negedge rstn) begin
    if (!rstn) begin
      for (int i = 0; i < ENG_WORDS; i++) eng[i] <= '0;
      tick      <= '0;
      hk_sample <= 1'b0;
    end else begin
      eng[ENG_VA_CFG]   <= status.va_cfg;
      eng[ENG_CRC_FLAG] <= {14'd0, status.tbl_sealed, status.crc_err};
      eng[ENG_TRIG_CNT] <= status.trig_cnt;
      eng[ENG_TIMEOUTS] <= {status.cmd_to_cnt, status.sci_to_cnt};
      hk_sample <= 1'b0;
      if (32'(tick) == MON_PERIOD - 1) begin
        tick        <= '0;
        eng[ENG_HK] <= hk_in;
        hk_sample   <= 1'b1;
      end else begin
        tick <= tick + 1'b1;
      end
    end
  end

  always_comb begin
    eng_word = '0;
    if (32'(eng_idx) < ENG_WORDS) eng_word = eng[eng_idx[2:0]];
  end

  assign alarm = eng[ENG_CRC_FLAG][0];
endmodule
