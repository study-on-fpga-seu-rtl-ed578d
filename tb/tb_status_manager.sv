// tb_status_manager: self-checking testbench for the status manager.
//
// Checks the long-lived state against a reference: va_cfgreg writes, the
// trigger and timeout counters, the status word handed to the monitor,
// and the table RAM (write, seal, use, CRC error). Upsets are injected
// into single replicas of the TMR registers (force/release between clock
// edges) and into the table RAM; the registers must not change and the
// RAM corruption must raise the CRC error.
module tb_status_manager;
  import fee_pkg::*;
  logic clk = 1'b0, rstn = 1'b0;
  logic cfg_wr = 0; logic [15:0] cfg_data = '0;
  logic tbl_wr_en = 0, tbl_seal_req = 0, tbl_use_req = 0;
  logic [7:0] tbl_wr_addr = '0, tbl_wr_data = '0;
  logic tbl_busy, tbl_use_done, tbl_crc_err, tbl_valid;
  logic [7:0] tbl_data;
  logic trig_accept = 0, cmd_timeout = 0, sci_timeout = 0;
  logic [15:0] va_cfg, trig_cnt;
  key_status_t status;
  logic [7:0] ctl_eng_idx = '0, mon_eng_idx;
  logic [15:0] ctl_eng_word, mon_eng_word;
  int checks = 0, failures = 0;
  logic [7:0] tbl_ref [254];
  int n_stream = 0; bit stream_ok = 1;

  status_manager dut (.*);

  always #5 clk = ~clk;
  assign mon_eng_word = {~mon_eng_idx, mon_eng_idx};
  always @(posedge clk) if (tbl_valid) begin
    if (n_stream >= 254 || tbl_data != tbl_ref[n_stream]) stream_ok = 0;
    n_stream++;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
  endtask

  task automatic wait_table;
    @(negedge clk);
    while (tbl_busy) @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] cfg_ref, bad;
    int trig_ref = 0, cto_ref = 0, sto_ref = 0, a;
    repeat (3) @(negedge clk);
    rstn = 1;
    wait_table();
    check(va_cfg == 0 && trig_cnt == 0 && !tbl_crc_err && status.tbl_sealed, "reset state");
    cfg_ref = 0;
    for (int n = 0; n < 200; n++) begin
      case ($urandom_range(0, 4))
        0: begin cfg_ref = 16'($urandom()); cfg_data = cfg_ref; pulse(cfg_wr); cfg_data = 16'($urandom()); end
        1: begin pulse(trig_accept); trig_ref++; end
        2: begin pulse(cmd_timeout); cto_ref++; end
        3: begin pulse(sci_timeout); sto_ref++; end
        default: begin
          // single upset in one replica of va_cfgreg
          bad = dut.u_va_cfgreg.rep1 ^ 16'($urandom_range(1, 65535));
          force dut.u_va_cfgreg.rep1 = bad; #1 release dut.u_va_cfgreg.rep1;
          #1 check(va_cfg == cfg_ref, "upset in va_cfgreg replica masked");
          @(negedge clk);
          check(dut.u_va_cfgreg.rep1 == cfg_ref, "replica repaired");
        end
      endcase
      check(va_cfg == cfg_ref && status.va_cfg == cfg_ref, "va_cfgreg value");
      ctl_eng_idx = 8'($urandom()); #1;
      check(mon_eng_idx == ctl_eng_idx && ctl_eng_word == {~ctl_eng_idx, ctl_eng_idx}, "engineering read path");
      check(trig_cnt == 16'(trig_ref) && status.trig_cnt == 16'(trig_ref), "trigger counter");
      check(status.cmd_to_cnt == 8'(cto_ref) && status.sci_to_cnt == 8'(sto_ref), "timeout counters");
    end
    // table: load, seal, use
    for (int k = 0; k < 254; k++) begin
      tbl_ref[k] = 8'($urandom());
      @(negedge clk); tbl_wr_en = 1; tbl_wr_addr = 8'(k); tbl_wr_data = tbl_ref[k];
    end
    @(negedge clk); tbl_wr_en = 0;
    check(!status.tbl_sealed, "unsealed after writes");
    pulse(tbl_seal_req); wait_table();
    check(status.tbl_sealed && !status.crc_err, "sealed");
    n_stream = 0; stream_ok = 1;
    pulse(tbl_use_req); wait_table();
    check(stream_ok && n_stream == 254 && !tbl_crc_err, "table streamed, CRC good");
    a = $urandom_range(0, 253);
    dut.u_table.mem[a] = dut.u_table.mem[a] ^ 8'h04;
    n_stream = 0;
    pulse(tbl_use_req); wait_table();
    check(tbl_crc_err && status.crc_err, "RAM upset raises CRC error");
    // soft reset (this block's reset) restores defaults
    @(negedge clk); rstn = 0; @(negedge clk); rstn = 1;
    wait_table();
    check(va_cfg == 0 && trig_cnt == 0 && !tbl_crc_err, "reset restores defaults");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
