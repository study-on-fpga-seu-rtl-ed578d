// tb_bgo_fee_fpga: end-to-end testbench of the FEE controller, at the
// design's default parameters.
//
// Models the board around the FPGA: a command link (serial frames), a
// trigger source, a front-end ADC that returns a sample derived from
// (event, channel), a science data receiver with random back-pressure and
// a housekeeping source. It runs a whole session and checks every answer:
//   - configuration, table load/seal/use and engineering reads by command
//   - science events end to end, including triggers dropped while busy
//   - upsets: in a va_cfgreg replica (masked and repaired), in the table
//     RAM (CRC error reported, alarm, cleared by resealing)
//   - a hung control state machine and a hung science receiver, each
//     broken by its own watchdog without disturbing the other part
//   - a soft reset by command, after which everything works again
// Each mechanism is counted and a mechanism that never happened counts as
// a failure.
module tb_bgo_fee_fpga;
  import fee_pkg::*;
  localparam int unsigned NCH = 16;
  localparam int unsigned NDATA = 254;

  logic clk = 1'b0, hw_rstn = 1'b0;
  logic cmd_bit = 0, cmd_bit_vld = 0;
  resp_t resp; logic resp_valid;
  logic trigger = 0;
  logic adc_req, adc_ack; logic [3:0] adc_ch; logic [15:0] adc_data;
  logic [15:0] sci_data; logic sci_valid, sci_ready;
  logic [15:0] va_cfg;
  logic [7:0] tbl_data; logic tbl_valid;
  logic [15:0] hk_in = 16'h0BEE; logic hk_sample;
  logic alarm, soft_rstn, cmd_path_rstn, sci_path_rstn;

  int checks = 0, failures = 0;

  bgo_fee_fpga dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ------------------------------------------------ peripheral models
  int ev = 0;             // event number the ADC model answers for
  int ready_pct = 100;
  function automatic logic [15:0] sample(input int e, input int ch);
    return 16'(e * 251 + ch * 3 + 16'h0100);
  endfunction
  assign adc_ack  = adc_req;
  assign adc_data = sample(ev, int'(adc_ch));

  logic [15:0] pkt [$];
  resp_t resps [$];
  logic [7:0] tstream [$];
  always @(posedge clk) begin
    sci_ready <= ($urandom_range(1, 100) <= ready_pct);
    if (sci_valid && sci_ready) pkt.push_back(sci_data);
    if (resp_valid) resps.push_back(resp);
    if (tbl_valid) tstream.push_back(tbl_data);
  end

  // ------------------------------------------------ mechanism counters
  int n_cmd_win = 0, n_sci_win = 0, n_cmd_to = 0, n_sci_to = 0, n_soft = 0;
  int n_stall = 0, n_hk = 0, n_trig_drop = 0, n_tmr_masked = 0, n_crc_err = 0;
  logic cmd_q = 0, sci_q = 0, soft_q = 1;
  always @(posedge clk) begin
    cmd_q <= cmd_path_rstn; sci_q <= sci_path_rstn; soft_q <= soft_rstn;
  end
  always @(posedge clk) if (hw_rstn) begin
    if (cmd_path_rstn && !cmd_q) n_cmd_win++;
    if (sci_path_rstn && !sci_q) n_sci_win++;
    if (!soft_rstn && soft_q && hw_rstn) n_soft++;
    if (dut.cmd_timeout) n_cmd_to++;
    if (dut.sci_timeout) n_sci_to++;
    if (sci_valid && !sci_ready) n_stall++;
    if (hk_sample) n_hk++;
    if (trigger && sci_path_rstn) n_trig_drop++;
  end

  // ------------------------------------------------ command link
  function automatic cmd_frame_t mk(input logic [7:0] op, input logic [15:0] arg);
    return '{sync: CMD_SYNC, op: op, arg: arg, chk: op ^ arg[15:8] ^ arg[7:0]};
  endfunction

  task automatic send_frame(input cmd_frame_t f);
    for (int i = FRAME_BITS - 1; i >= 0; i--) begin
      @(negedge clk); cmd_bit = f[i]; cmd_bit_vld = 1;
    end
    @(negedge clk); cmd_bit_vld = 0;
  endtask

  // send a command and wait for its response (or for the window to close)
  task automatic command(input cmd_frame_t f, output resp_t r, output bit got);
    int n0 = resps.size();
    send_frame(f);
    @(negedge clk);
    while (cmd_path_rstn) @(negedge clk);
    @(negedge clk);
    got = (resps.size() == n0 + 1);
    r = got ? resps[n0] : '0;
  endtask

  task automatic cmd_ok(input logic [7:0] op, input logic [15:0] arg, input logic [7:0] st,
                        output resp_t r);
    bit got;
    command(mk(op, arg), r, got);
    check(got, $sformatf("response to op %02h", op));
    check(r.op == op && r.status == st, $sformatf("op %02h status %02h (want %02h)", op, r.status, st));
  endtask

  // one science event; returns cycles from trigger to the end of the window
  task automatic event_run(input int e, output int cycles);
    logic [15:0] trig_before;
    trig_before = dut.trig_cnt;
    ev = e; pkt.delete();
    @(negedge clk); trigger = 1; @(negedge clk); trigger = 0;
    cycles = 1;
    while (sci_path_rstn) begin @(negedge clk); cycles++; end
    check(pkt.size() == NCH + 2, $sformatf("event %0d packet length %0d", e, pkt.size()));
    if (pkt.size() == NCH + 2) begin
      bit ok = pkt[0] == SCI_HEADER && pkt[1] == trig_before + 16'd1;
      for (int c = 0; c < NCH; c++) if (pkt[2 + c] != sample(e, c)) ok = 0;
      check(ok, $sformatf("event %0d packet contents", e));
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    resp_t r;
    bit got;
    int cyc, a;
    logic [7:0] tbl_ref [NDATA];
    logic [15:0] cfg, bad;

    repeat (4) @(negedge clk);
    check(!soft_rstn && !cmd_path_rstn && !sci_path_rstn, "hardware reset holds all");
    hw_rstn = 1;
    repeat (300) @(negedge clk);      // table fill after reset
    check(soft_rstn && !cmd_path_rstn && !sci_path_rstn && !alarm, "idle after reset");

    // ---- configuration and engineering read-back
    cfg = 16'hC3A1;
    cmd_ok(OP_WR_CFG, cfg, ST_OK, r);
    check(va_cfg == cfg, "va_cfgreg written by command");
    cmd_ok(OP_RD_ENG, 16'(ENG_VA_CFG), ST_OK, r);
    check(r.value == cfg, "va_cfgreg monitored");
    command(mk(OP_WR_CFG, 16'h1111) ^ 40'h1, r, got);
    check(got && r.status == ST_BAD_CHK && va_cfg == cfg, "corrupted command refused");
    cmd_ok(8'h3C, 16'h0, ST_BAD_OP, r);

    // ---- upsets in va_cfgreg replicas
    for (int k = 0; k < 3; k++) begin
      @(negedge clk);
      bad = cfg ^ 16'(1 << $urandom_range(0, 15));
      case (k)
        0: begin force dut.u_status.u_va_cfgreg.rep0 = bad; #1 release dut.u_status.u_va_cfgreg.rep0; end
        1: begin force dut.u_status.u_va_cfgreg.rep1 = bad; #1 release dut.u_status.u_va_cfgreg.rep1; end
        default: begin force dut.u_status.u_va_cfgreg.rep2 = bad; #1 release dut.u_status.u_va_cfgreg.rep2; end
      endcase
      #1;
      if (va_cfg == cfg) n_tmr_masked++;
      check(va_cfg == cfg, "va_cfgreg upset masked");
      @(negedge clk);
      check(dut.u_status.u_va_cfgreg.rep0 == cfg && dut.u_status.u_va_cfgreg.rep1 == cfg &&
            dut.u_status.u_va_cfgreg.rep2 == cfg, "va_cfgreg replica rewritten");
    end

    // ---- table load, seal, use
    for (int k = 0; k < NDATA; k++) begin
      tbl_ref[k] = 8'($urandom());
      cmd_ok(OP_WR_TBL, {8'(k), tbl_ref[k]}, ST_OK, r);
    end
    cmd_ok(OP_SEAL_TBL, 16'h0, ST_OK, r);
    tstream.delete();
    cmd_ok(OP_USE_TBL, 16'h0, ST_OK, r);
    begin
      bit ok;
      ok = tstream.size() == NDATA;
      if (ok) for (int k = 0; k < NDATA; k++) if (tstream[k] != tbl_ref[k]) begin
        if (ok) $display("table word %0d: %02h, expected %02h", k, tstream[k], tbl_ref[k]);
        ok = 0;
      end
      check(ok, $sformatf("table streamed to the peripherals (%0d words)", tstream.size()));
    end
    check(!alarm, "no alarm on a clean table");
    // upset in the table RAM
    a = $urandom_range(0, NDATA - 1);
    dut.u_status.u_table.mem[a] = dut.u_status.u_table.mem[a] ^ 8'h20;
    cmd_ok(OP_USE_TBL, 16'h0, ST_CRC_ERR, r);
    if (r.status == ST_CRC_ERR) n_crc_err++;
    @(negedge clk);
    check(alarm, "alarm raised by the CRC indicator");
    cmd_ok(OP_RD_ENG, 16'(ENG_CRC_FLAG), ST_OK, r);
    check(r.value[0], "CRC indicator monitored");
    cmd_ok(OP_WR_TBL, {8'(a), tbl_ref[a]}, ST_OK, r);
    cmd_ok(OP_SEAL_TBL, 16'h0, ST_OK, r);
    cmd_ok(OP_USE_TBL, 16'h0, ST_OK, r);
    @(negedge clk);
    check(!alarm, "reconfigured table clears the alarm");

    // ---- science events
    ready_pct = 70;
    for (int e = 1; e <= 20; e++) begin
      event_run(e, cyc);
      check(cyc < 200, "event completes");
    end
    // trigger arriving while an event is running is dropped
    pkt.delete(); ev = 21;
    @(negedge clk); trigger = 1; @(negedge clk); trigger = 0;
    repeat (5) @(negedge clk);
    trigger = 1; @(negedge clk); trigger = 0;
    while (sci_path_rstn) @(negedge clk);
    check(pkt.size() == NCH + 2, "busy trigger did not start a second event");
    cmd_ok(OP_RD_ENG, 16'(ENG_TRIG_CNT), ST_OK, r);
    check(r.value == 16'd21, $sformatf("trigger counter %0d", r.value));

    // ---- hung science receiver: the science watchdog resets the part
    ready_pct = 0;
    @(negedge clk); trigger = 1; @(negedge clk); trigger = 0;
    cyc = 1;
    while (sci_path_rstn) begin @(negedge clk); cyc++; end
    check(cyc >= 8192 && cyc < 8200, $sformatf("science watchdog after %0d cycles", cyc));
    ready_pct = 100;
    event_run(30, cyc);            // the next event is clean
    cmd_ok(OP_RD_ENG, 16'(ENG_TIMEOUTS), ST_OK, r);
    check(r.value == 16'h0001, "science timeout counted");

    // ---- hung control part: an upset in its state register
    send_frame(mk(OP_WR_CFG, 16'h7777));
    @(negedge clk);
    force dut.u_control.state = S_WAIT;   // S_WAIT: waits for a table pass that never comes
    @(negedge clk);
    release dut.u_control.state;
    cyc = 2;
    while (cmd_path_rstn) begin @(negedge clk); cyc++; end
    check(cyc >= 1024 && cyc < 1030, $sformatf("command watchdog after %0d cycles", cyc));
    cmd_ok(OP_RD_ENG, 16'(ENG_TIMEOUTS), ST_OK, r);
    check(r.value == 16'h0101, "command timeout counted, next command fine");

    // ---- housekeeping
    hk_in = 16'h2468;
    repeat (1100) @(negedge clk);
    cmd_ok(OP_RD_ENG, 16'(ENG_HK), ST_OK, r);
    check(r.value == 16'h2468, "housekeeping monitored");

    // ---- soft reset by command
    send_frame(mk(OP_RESET, RESET_KEY));
    @(negedge clk);
    check(!soft_rstn, "soft reset active");
    check(va_cfg == 16'h0, "soft reset clears va_cfgreg");
    repeat (300) @(negedge clk);
    check(soft_rstn, "soft reset released");
    cmd_ok(OP_RD_ENG, 16'(ENG_TIMEOUTS), ST_OK, r);
    check(r.value == 16'h0, "soft reset clears the key registers");
    cmd_ok(OP_WR_CFG, 16'hBEEF, ST_OK, r);
    check(va_cfg == 16'hBEEF, "commands work after soft reset");
    event_run(40, cyc);

    // ---- mechanisms seen
    $display("mechanisms: cmd windows %0d, sci windows %0d, cmd timeouts %0d, sci timeouts %0d,",
             n_cmd_win, n_sci_win, n_cmd_to, n_sci_to);
    $display("  soft resets %0d, stalls %0d, hk samples %0d, dropped triggers %0d, TMR masks %0d, CRC errors %0d",
             n_soft, n_stall, n_hk, n_trig_drop, n_tmr_masked, n_crc_err);
    check(n_cmd_win > 0, "command window happened");
    check(n_sci_win > 0, "science window happened");
    check(n_cmd_to == 1, "command timeout happened once");
    check(n_sci_to == 1, "science timeout happened once");
    check(n_soft == 1, "soft reset happened once");
    check(n_stall > 0, "receiver stall happened");
    check(n_hk > 0, "housekeeping sample happened");
    check(n_trig_drop > 0, "dropped trigger happened");
    check(n_tmr_masked == 3, "TMR masking happened");
    check(n_crc_err == 1, "CRC error happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
