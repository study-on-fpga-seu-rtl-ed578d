// tb_cmd_shifter: self-checking testbench for the command shifter.
//
// Sends random command frames bit-serially with random idle gaps and
// zero-bit noise between frames. Checks that every frame is delivered
// once, intact, with frame_vld; that a well-formed reset command gives
// soft_req and no frame; and that a reset command with a wrong key or a
// wrong checksum is handed on as an ordinary frame instead.
module tb_cmd_shifter;
  import fee_pkg::*;
  logic clk = 1'b0, hw_rstn = 1'b0;
  logic bit_in = 1'b0, bit_vld = 1'b0;
  cmd_frame_t frame;
  logic frame_vld, soft_req;
  int checks = 0, failures = 0;
  int n_frames = 0, n_soft = 0;
  cmd_frame_t last;

  cmd_shifter dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (frame_vld) begin n_frames++; last = frame; end
    if (soft_req) n_soft++;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic send_bit(input logic b);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) begin bit_vld = 0; @(negedge clk); end
    bit_in = b; bit_vld = 1;
    @(negedge clk); bit_vld = 0; bit_in = $urandom();
  endtask

  task automatic send_frame(input cmd_frame_t f);
    for (int i = FRAME_BITS - 1; i >= 0; i--) send_bit(f[i]);
    repeat (2) @(negedge clk);
  endtask

  function automatic cmd_frame_t mk(input logic [7:0] op, input logic [15:0] arg);
    return '{sync: CMD_SYNC, op: op, arg: arg, chk: op ^ arg[15:8] ^ arg[7:0]};
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_frame_t f;
    int nf, ns;
    repeat (3) @(negedge clk);
    hw_rstn = 1;
    for (int n = 0; n < 100; n++) begin
      // some zero noise bits before the frame
      repeat ($urandom_range(0, 5)) send_bit(1'b0);
      nf = n_frames; ns = n_soft;
      case ($urandom_range(0, 4))
        0: begin  // proper reset command
          f = mk(OP_RESET, RESET_KEY);
          send_frame(f);
          check(n_soft == ns + 1 && n_frames == nf, "reset command gives soft_req only");
        end
        1: begin  // reset opcode, wrong key
          f = mk(OP_RESET, RESET_KEY ^ 16'h0100);
          send_frame(f);
          check(n_soft == ns && n_frames == nf + 1 && last == f, "bad-key reset handed on");
        end
        2: begin  // reset command with a broken checksum
          f = mk(OP_RESET, RESET_KEY); f.chk ^= 8'h01;
          send_frame(f);
          check(n_soft == ns && n_frames == nf + 1 && last == f, "bad-checksum reset handed on");
        end
        default: begin
          f = mk(8'($urandom_range(1, 5)), 16'($urandom()));
          if ($urandom_range(0, 3) == 0) f.chk = 8'($urandom());
          send_frame(f);
          check(n_soft == ns && n_frames == nf + 1, "one frame delivered");
          check(last == f, "frame intact");
          check(frame == f, "frame held");
        end
      endcase
    end
    // a frame whose first byte is not the sync byte is never taken
    nf = n_frames;
    f = mk(OP_WR_CFG, 16'h1234); f.sync = 8'h00;
    send_frame(f);
    check(n_frames == nf, "no sync, no frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
