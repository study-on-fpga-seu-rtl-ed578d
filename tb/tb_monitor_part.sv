// tb_monitor_part: self-checking testbench for the engineering monitor.
//
// Drives random key-status values and housekeeping words and reads every
// engineering word back by number. Key registers must appear one cycle
// after they change; the housekeeping word is sampled every MON_PERIOD
// cycles exactly; out-of-range numbers read zero; alarm follows the CRC
// error bit.
module tb_monitor_part;
  import fee_pkg::*;
  localparam int unsigned PER = 8;
  logic clk = 1'b0, rstn = 1'b0;
  logic [15:0] hk_in = '0;
  key_status_t status = '0;
  logic [7:0] eng_idx = '0;
  logic [15:0] eng_word;
  logic hk_sample, alarm;
  int checks = 0, failures = 0;

  monitor_part #(.MON_PERIOD(PER)) dut (.*);

  always #50 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic rd(input int i, output logic [15:0] w);
    eng_idx = 8'(i); #1; w = eng_word;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] w, hk_expect;
    int since, gap;
    repeat (2) @(negedge clk);
    rd(ENG_VA_CFG, w); check(w == 0, "cleared by reset");
    rstn = 1;
    hk_expect = 0; since = 0; gap = -1;
    @(negedge clk);
    for (int n = 0; n < 400; n++) begin
      status = key_status_t'({$urandom(), $urandom()});
      hk_in = 16'($urandom());
      @(negedge clk);
      // hk_sample marks the edge just passed: hk_in (set one cycle ago)
      // must now be the housekeeping word
      if (hk_sample) begin
        if (gap >= 0) check(since == PER, $sformatf("housekeeping period %0d", since));
        gap = since; since = 0; hk_expect = hk_in;
      end
      since++;
      rd(ENG_HK, w); check(w == hk_expect, "housekeeping word holds last sample");
      rd(ENG_VA_CFG, w);   check(w == status.va_cfg, "va_cfg word");
      rd(ENG_CRC_FLAG, w); check(w == {14'd0, status.tbl_sealed, status.crc_err}, "crc flag word");
      rd(ENG_TRIG_CNT, w); check(w == status.trig_cnt, "trigger count word");
      rd(ENG_TIMEOUTS, w); check(w == {status.cmd_to_cnt, status.sci_to_cnt}, "timeout word");
      rd(ENG_WORDS + n % 100, w); check(w == 0, "unused numbers read zero");
      check(alarm == status.crc_err, "alarm follows CRC error");
    end
    check(gap == PER, $sformatf("housekeeping sampled periodically (%0d)", gap));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
