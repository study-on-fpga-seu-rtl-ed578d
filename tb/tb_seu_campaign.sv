// tb_seu_campaign: upset campaign on the whole FEE controller, the
// simulated counterpart of a heavy-ion functional test.
//
// The board runs a steady mix of commands and triggered events at default
// parameters while a second process injects single-event upsets at random
// times into the storage the hardening is meant to cover:
//   - one replica of one of the TMR registers (va_cfgreg, trigger counter,
//     timeout counters), at any time;
//   - the state of the control part or the science part while that part is
//     asleep in its path reset;
//   - a word of the table RAM, while the table is idle.
// The claim under test is that the board "works with no mistakes": every
// response and every science packet is exactly what an upset-free board
// would give, and every RAM upset is reported by the CRC check at the next
// use of the table (the ground then reloads the table, as it would in
// flight). Upsets into the logic of a procedure that is running are not
// injected here; their recovery through the watchdogs is covered by the
// end-to-end testbench.
module tb_seu_campaign;
  import fee_pkg::*;
  localparam int unsigned NCH = 16;
  localparam int unsigned NDATA = 254;
  localparam int unsigned N_OPS = 1000;

  logic clk = 1'b0, hw_rstn = 1'b0;
  logic cmd_bit = 0, cmd_bit_vld = 0;
  resp_t resp; logic resp_valid;
  logic trigger = 0;
  logic adc_req, adc_ack; logic [3:0] adc_ch; logic [15:0] adc_data;
  logic [15:0] sci_data; logic sci_valid, sci_ready;
  logic [15:0] va_cfg;
  logic [7:0] tbl_data; logic tbl_valid;
  logic [15:0] hk_in = 16'h0123; logic hk_sample;
  logic alarm, soft_rstn, cmd_path_rstn, sci_path_rstn;
  int checks = 0, failures = 0;

  bgo_fee_fpga dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ------------------------------------------------ board models
  int ev = 0;
  function automatic logic [15:0] sample(input int e, input int ch);
    return 16'(e * 97 + ch * 5 + 16'h0200);
  endfunction
  assign adc_ack  = adc_req;
  assign adc_data = sample(ev, int'(adc_ch));
  logic [15:0] pkt [$];
  resp_t resps [$];
  always @(posedge clk) begin
    sci_ready <= ($urandom_range(0, 3) != 0);
    if (sci_valid && sci_ready) pkt.push_back(sci_data);
    if (resp_valid) resps.push_back(resp);
  end

  // ------------------------------------------------ upset injector
  bit inject_on = 0;
  bit ram_upset_pending = 0;
  bit main_busy_tbl = 0;      // main thread is using the table
  int n_up_tmr = 0, n_up_sleep = 0, n_up_ram = 0;
  logic [15:0] b16; logic [7:0] b8;

`define UPSET16(p) begin b16 = p ^ 16'(1 << $urandom_range(0, 15)); force p = b16; #1 release p; end
`define UPSET8(p)  begin b8  = p ^ 8'(1 << $urandom_range(0, 7));   force p = b8;  #1 release p; end

  initial begin : injector
    int a, k;
    wait (inject_on);
    forever begin
      repeat ($urandom_range(20, 300)) @(negedge clk);
      #2;
      k = $urandom_range(0, 9);
      if (k <= 6) n_up_tmr++;
      case (k)
        0: `UPSET16(dut.u_status.u_va_cfgreg.rep0)
        1: `UPSET16(dut.u_status.u_va_cfgreg.rep1)
        2: `UPSET16(dut.u_status.u_va_cfgreg.rep2)
        3: `UPSET16(dut.u_status.u_trig_cnt.rep0)
        4: `UPSET16(dut.u_status.u_trig_cnt.rep2)
        5: `UPSET8(dut.u_status.u_cmd_to_cnt.rep1)
        6: `UPSET8(dut.u_status.u_sci_to_cnt.rep0)
        7: if (!cmd_path_rstn && !dut.frame_vld) begin
             force dut.u_control.state = S_WAIT; #1 release dut.u_control.state;
             `UPSET16(dut.u_control.value)
             n_up_sleep++;
           end
        8: if (!sci_path_rstn && !trigger) begin
             `UPSET16(dut.u_sci.trig_q)
             n_up_sleep++;
           end
        default: if (!main_busy_tbl && !dut.tbl_busy && !cmd_path_rstn && !ram_upset_pending) begin
             a = $urandom_range(0, 255);
             dut.u_status.u_table.mem[a] = dut.u_status.u_table.mem[a] ^ 8'h01;
             ram_upset_pending = 1;
             n_up_ram++;
           end
      endcase
    end
  end

  // ------------------------------------------------ command link
  function automatic cmd_frame_t mk(input logic [7:0] op, input logic [15:0] arg);
    return '{sync: CMD_SYNC, op: op, arg: arg, chk: op ^ arg[15:8] ^ arg[7:0]};
  endfunction

  task automatic command(input logic [7:0] op, input logic [15:0] arg, output resp_t r);
    int n0 = resps.size();
    for (int i = FRAME_BITS - 1; i >= 0; i--) begin
      cmd_frame_t f = mk(op, arg);
      @(negedge clk); cmd_bit = f[i]; cmd_bit_vld = 1;
    end
    @(negedge clk); cmd_bit_vld = 0;
    @(negedge clk);
    while (cmd_path_rstn) @(negedge clk);
    @(negedge clk);
    check(resps.size() == n0 + 1, $sformatf("one response to op %02h", op));
    r = (resps.size() == n0 + 1) ? resps[n0] : '0;
    check(r.op == op, "response opcode");
  endtask

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    resp_t r;
    logic [15:0] cfg = 16'h0;
    logic [7:0] tbl [NDATA];
    int trig = 0, n_cmd = 0, n_ev = 0, n_use = 0, n_reload = 0;
    repeat (4) @(negedge clk);
    hw_rstn = 1;
    repeat (300) @(negedge clk);
    // configure the table
    foreach (tbl[k]) tbl[k] = 8'($urandom());
    main_busy_tbl = 1;
    for (int k = 0; k < NDATA; k++) command(OP_WR_TBL, {8'(k), tbl[k]}, r);
    command(OP_SEAL_TBL, 0, r);
    main_busy_tbl = 0;
    inject_on = 1;
    for (int n = 0; n < N_OPS; n++) begin
      case ($urandom_range(0, 5))
        0: begin
          cfg = 16'($urandom());
          command(OP_WR_CFG, cfg, r); n_cmd++;
          check(r.status == ST_OK && va_cfg == cfg, "va_cfgreg written");
        end
        1: begin
          command(OP_RD_ENG, 16'(ENG_VA_CFG), r); n_cmd++;
          check(r.status == ST_OK && r.value == cfg, "va_cfgreg intact");
        end
        2: begin
          command(OP_RD_ENG, 16'(ENG_TIMEOUTS), r); n_cmd++;
          check(r.value == 16'h0, "no procedure needed a watchdog");
        end
        3: begin
          // use the table; a RAM upset since the last use must be reported
          bit expect_err;
          main_busy_tbl = 1;
          expect_err = ram_upset_pending;
          command(OP_USE_TBL, 0, r); n_cmd++; n_use++;
          check(r.status == (expect_err ? ST_CRC_ERR : ST_OK),
                $sformatf("table check (upset pending %0d)", expect_err));
          if (r.status == ST_CRC_ERR) begin
            // the ground reloads the table
            @(negedge clk);
            check(alarm, "alarm with CRC error");
            for (int k = 0; k < NDATA; k++) command(OP_WR_TBL, {8'(k), tbl[k]}, r);
            command(OP_SEAL_TBL, 0, r);
            ram_upset_pending = 0;
            n_reload++;
            @(negedge clk);
            check(!alarm, "alarm cleared by reload");
          end
          main_busy_tbl = 0;
        end
        default: begin
          ev++; trig++; pkt.delete();
          @(negedge clk); trigger = 1; @(negedge clk); trigger = 0;
          @(negedge clk);
          while (sci_path_rstn) @(negedge clk);
          n_ev++;
          begin
            bit ok;
            ok = pkt.size() == NCH + 2 && pkt[0] == SCI_HEADER && pkt[1] == 16'(trig);
            if (ok) for (int c = 0; c < NCH; c++) if (pkt[2 + c] != sample(ev, c)) ok = 0;
            check(ok, $sformatf("event %0d packet exact", ev));
          end
        end
      endcase
    end
    inject_on = 0;
    $display("campaign: %0d commands, %0d events, %0d table uses, %0d reloads",
             n_cmd, n_ev, n_use, n_reload);
    $display("upsets: %0d in TMR replicas, %0d in sleeping parts, %0d in RAM",
             n_up_tmr, n_up_sleep, n_up_ram);
    check(n_up_sleep > 0, "upsets hit sleeping parts");
    check(n_up_ram > 0, "upsets hit the RAM");
    check(n_reload > 0, "a CRC error led to a reload");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
