// tb_tmr_reg: self-checking testbench for the TMR register with write-back.
//
// Writes random values, then injects single-event upsets by flipping bits
// of one replica at a time (a force/release of the replica between clock
// edges). Checks that the voted output never shows the upset, that
// the upset replica is repaired on the very next clock edge (the
// write-back), that two upsets in different replicas in different cycles
// are both corrected, and that a write still loads all three replicas.
module tb_tmr_reg;
  localparam int unsigned W = 16;
  logic clk = 1'b0, rstn = 1'b0, select = 1'b0;
  logic [W-1:0] d = '0, q;
  int checks = 0, failures = 0;

  tmr_reg #(.WIDTH(W), .RESET_VALUE(16'h1234)) dut (.clk, .rstn, .select, .d, .q);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic write(input logic [W-1:0] v);
    @(negedge clk); d = v; select = 1'b1;
    @(negedge clk); select = 1'b0; d = $urandom();
  endtask

  // An upset is modelled by forcing the flipped value into one replica and
  // releasing it at once: the replica keeps the wrong value until its own
  // flip-flop is next clocked.
  task automatic upset(input int which, input logic [W-1:0] m);
    logic [W-1:0] bad;
    case (which)
      0: begin bad = dut.rep0 ^ m; force dut.rep0 = bad; #1 release dut.rep0; end
      1: begin bad = dut.rep1 ^ m; force dut.rep1 = bad; #1 release dut.rep1; end
      default: begin bad = dut.rep2 ^ m; force dut.rep2 = bad; #1 release dut.rep2; end
    endcase
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] v, m;
    int which;
    repeat (2) @(negedge clk);
    check(q == 16'h1234, "reset value");
    rstn = 1'b1;
    repeat (2) @(negedge clk);
    check(q == 16'h1234, "holds reset value");
    for (int n = 0; n < 200; n++) begin
      v = $urandom();
      write(v);
      check(q == v, "write");
      check(dut.rep0 == v && dut.rep1 == v && dut.rep2 == v, "write loads all replicas");
      // single upset in a random replica, random non-zero bit mask
      m = $urandom(); if (m == '0) m = 1;
      which = $urandom_range(0, 2);
      upset(which, m);
      #1;
      check(q == v, "voter masks upset");
      @(negedge clk);
      check(dut.rep0 == v && dut.rep1 == v && dut.rep2 == v, "write-back repairs upset in one cycle");
      check(q == v, "value kept after repair");
      // a second upset in another replica, one cycle later, is also masked
      which = (which + 1) % 3;
      upset(which, m);
      @(negedge clk);
      check(q == v && dut.rep0 == v && dut.rep1 == v && dut.rep2 == v, "successive upsets do not accumulate");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
