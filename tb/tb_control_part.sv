// tb_control_part: self-checking testbench for the command handling
// procedure.
//
// Each command is run the way the reset manager runs it: the frame is set
// up while the part is held in reset, the reset is released, and the part
// must run its procedure, give exactly one response and raise done. A small
// model of the table RAM (busy for a random time after a seal or use
// request, use_done at the end, a settable CRC error) stands in for the
// status manager. Side effects (va_cfgreg and table strobes) are counted,
// responses and the procedure length in cycles are checked.
module tb_control_part;
  import fee_pkg::*;
  logic clk = 1'b0, rstn = 1'b0;
  cmd_frame_t frame = '0;
  logic cfg_wr; logic [15:0] cfg_data;
  logic tbl_wr_en, tbl_seal_req, tbl_use_req;
  logic [7:0] tbl_wr_addr, tbl_wr_data;
  logic tbl_busy = 0, tbl_use_done = 0, tbl_crc_err = 0;
  logic [7:0] eng_idx; logic [15:0] eng_word;
  resp_t resp; logic resp_valid, done;
  int checks = 0, failures = 0;
  int n_cfg = 0, n_wr = 0, n_seal = 0, n_use = 0, n_resp = 0;
  logic [15:0] last_cfg; logic [7:0] last_a, last_d; resp_t last_resp;
  int busy_left = 0; bit use_pass = 0;

  control_part dut (.*);

  always #5 clk = ~clk;
  assign eng_word = {eng_idx, ~eng_idx};

  // table model
  always @(posedge clk) begin
    tbl_use_done <= 0;
    if (cfg_wr) begin n_cfg++; last_cfg = cfg_data; end
    if (tbl_wr_en) begin n_wr++; last_a = tbl_wr_addr; last_d = tbl_wr_data; end
    if (resp_valid) begin n_resp++; last_resp = resp; end
    if (busy_left > 0) begin
      busy_left--;
      if (busy_left == 0) begin
        tbl_busy <= 0;
        if (use_pass) tbl_use_done <= 1;
      end
    end else if (tbl_seal_req || tbl_use_req) begin
      if (tbl_seal_req) n_seal++;
      if (tbl_use_req) n_use++;
      use_pass = tbl_use_req;
      tbl_busy <= 1;
      busy_left = $urandom_range(3, 40);
    end
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic cmd_frame_t mk(input logic [7:0] op, input logic [15:0] arg);
    return '{sync: CMD_SYNC, op: op, arg: arg, chk: op ^ arg[15:8] ^ arg[7:0]};
  endfunction

  // run one procedure, return cycles from reset release to done
  task automatic run(input cmd_frame_t f, output int cycles);
    @(negedge clk); rstn = 0; frame = f;
    @(negedge clk); rstn = 1;
    cycles = 0;
    while (!done && cycles < 1000) begin @(negedge clk); cycles++; end
    @(negedge clk); rstn = 0;
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_frame_t f;
    int cyc, c0, w0, s0, u0, r0;
    logic [15:0] arg;
    repeat (3) @(negedge clk);
    check(!done && !resp_valid && !cfg_wr, "quiet in reset");
    for (int n = 0; n < 300; n++) begin
      arg = 16'($urandom());
      c0 = n_cfg; w0 = n_wr; s0 = n_seal; u0 = n_use; r0 = n_resp;
      case ($urandom_range(0, 6))
        0: begin
          run(mk(OP_WR_CFG, arg), cyc);
          check(cyc == 4, $sformatf("WR_CFG takes %0d cycles", cyc));
          check(n_cfg == c0 + 1 && last_cfg == arg, "va_cfgreg written once");
          check(last_resp == '{op: OP_WR_CFG, status: ST_OK, value: arg}, "WR_CFG response");
        end
        1: begin
          run(mk(OP_WR_TBL, arg), cyc);
          check(cyc == 4, $sformatf("WR_TBL takes %0d cycles", cyc));
          check(n_wr == w0 + 1 && last_a == arg[15:8] && last_d == arg[7:0], "table word written once");
          check(last_resp.status == ST_OK, "WR_TBL response");
        end
        2: begin
          run(mk(OP_SEAL_TBL, arg), cyc);
          check(n_seal == s0 + 1 && n_use == u0, "one seal pass");
          check(!tbl_busy, "response after the pass ended");
          check(last_resp.status == ST_OK && last_resp.op == OP_SEAL_TBL, "SEAL response");
        end
        3: begin
          tbl_crc_err = $urandom_range(0, 1);
          run(mk(OP_USE_TBL, arg), cyc);
          check(n_use == u0 + 1 && n_seal == s0, "one use pass");
          check(last_resp.status == (tbl_crc_err ? ST_CRC_ERR : ST_OK), "USE response reports CRC check");
        end
        4: begin
          run(mk(OP_RD_ENG, arg), cyc);
          check(cyc == 4, $sformatf("RD_ENG takes %0d cycles", cyc));
          check(last_resp.value == {arg[7:0], ~arg[7:0]} && last_resp.status == ST_OK, "RD_ENG returns word");
        end
        5: begin
          f = mk(8'($urandom_range(1, 5)), arg); f.chk ^= 8'h40;
          run(f, cyc);
          check(last_resp.status == ST_BAD_CHK, "bad checksum refused");
          check(n_cfg == c0 && n_wr == w0 && n_seal == s0 && n_use == u0, "nothing executed");
        end
        default: begin
          run(mk(8'($urandom_range(6, 255)), arg), cyc);
          check(last_resp.status == ST_BAD_OP, "unknown opcode refused");
          check(n_cfg == c0 && n_wr == w0 && n_seal == s0 && n_use == u0, "nothing executed");
        end
      endcase
      check(n_resp == r0 + 1, "exactly one response");
      check(cyc < 1000, "procedure ends");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
