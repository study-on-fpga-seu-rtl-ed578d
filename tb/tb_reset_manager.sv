// tb_reset_manager: self-checking testbench for the multi-domain reset.
//
// Checks the nesting of the four resets, the soft reset length, the
// opening and closing of the command and science windows on start/done,
// that starts are ignored while a window is open, and that each watchdog
// closes a window after exactly its timeout and pulses its timeout flag.
module tb_reset_manager;
  localparam int unsigned SRC = 4, CTO = 20, STO = 30;
  logic clk = 1'b0, hw_rstn = 1'b0;
  logic soft_req = 0, cmd_start = 0, cmd_done = 0, sci_start = 0, sci_done = 0;
  logic soft_rstn, cmd_path_rstn, sci_path_rstn, cmd_accept, sci_accept, cmd_timeout, sci_timeout;
  int checks = 0, failures = 0;
  int n_cmd_to = 0, n_sci_to = 0;

  reset_manager #(.SOFT_RST_CYCLES(SRC), .CMD_TIMEOUT(CTO), .SCI_TIMEOUT(STO)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (hw_rstn) begin
    if (cmd_timeout) n_cmd_to++;
    if (sci_timeout) n_sci_to++;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // pulse a signal for one cycle (set at negedge, cleared at next negedge)
  task automatic cyc(input int n); repeat (n) @(negedge clk); endtask

  // count cycles (sampled at negedge) for which sig stays at val
  task automatic count_while(ref logic sig, input logic val, output int n);
    n = 0;
    while (sig == val && n < 10000) begin @(negedge clk); n++; end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    cyc(2);
    check(!soft_rstn && !cmd_path_rstn && !sci_path_rstn, "all low in hardware reset");
    // start requests during hardware reset are not taken
    cmd_start = 1; cyc(1); cmd_start = 0;
    check(!cmd_path_rstn, "no window during hw reset");
    hw_rstn = 1'b1;
    cyc(1);
    check(soft_rstn, "soft_rstn follows hw_rstn");
    check(!cmd_path_rstn && !sci_path_rstn, "idle parts held in reset");
    cyc(3);
    check(!cmd_path_rstn && !sci_path_rstn, "idle parts stay in reset");

    // ---- command window with done
    cmd_start = 1; #1; check(cmd_accept, "start accepted"); cyc(1); cmd_start = 0;
    check(cmd_path_rstn, "cmd window opens one cycle after start");
    check(!sci_path_rstn, "science part stays asleep");
    cyc(5);
    cmd_start = 1; #1; check(!cmd_accept, "start ignored while busy"); cyc(1); cmd_start = 0;
    check(cmd_path_rstn, "window still open");
    cmd_done = 1; cyc(1); cmd_done = 0;
    check(!cmd_path_rstn, "window closes one cycle after done");
    check(n_cmd_to == 0, "no timeout on done");

    // ---- command watchdog
    cmd_start = 1; cyc(1); cmd_start = 0;
    count_while(cmd_path_rstn, 1'b1, n);
    check(n == CTO, $sformatf("command timeout after %0d cycles", n));
    cyc(1);
    check(n_cmd_to == 1, "command timeout flagged once");

    // ---- science window with done, and watchdog
    sci_start = 1; #1; check(sci_accept, "trigger accepted"); cyc(1); sci_start = 0;
    check(sci_path_rstn && !cmd_path_rstn, "science window opens alone");
    cyc(7);
    sci_start = 1; #1; check(!sci_accept, "trigger ignored while busy"); cyc(1); sci_start = 0;
    sci_done = 1; cyc(1); sci_done = 0;
    check(!sci_path_rstn, "science window closes on done");
    sci_start = 1; cyc(1); sci_start = 0;
    count_while(sci_path_rstn, 1'b1, n);
    check(n == STO, $sformatf("science timeout after %0d cycles", n));
    cyc(1);
    check(n_sci_to == 1, "science timeout flagged once");
    check(n_cmd_to == 1, "command watchdog untouched");

    // ---- both windows open together, then a soft reset closes both
    cmd_start = 1; sci_start = 1; cyc(1); cmd_start = 0; sci_start = 0;
    check(cmd_path_rstn && sci_path_rstn, "both parts awake");
    soft_req = 1; cyc(1); soft_req = 0;
    check(!soft_rstn && !cmd_path_rstn && !sci_path_rstn, "soft reset resets both paths");
    count_while(soft_rstn, 1'b0, n);
    check(n == SRC + 1, $sformatf("soft reset lasts %0d cycles", n));
    check(!cmd_path_rstn && !sci_path_rstn, "paths asleep after soft reset");
    cmd_start = 1; cyc(1); cmd_start = 0;
    check(cmd_path_rstn, "window opens again after soft reset");
    // ---- hardware reset overrides everything
    hw_rstn = 0; #1;
    check(!soft_rstn && !cmd_path_rstn && !sci_path_rstn, "hw reset is asynchronous and global");
    cyc(2); hw_rstn = 1; cyc(2);
    check(soft_rstn && !cmd_path_rstn, "back to idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
