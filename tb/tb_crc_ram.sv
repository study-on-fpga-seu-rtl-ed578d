// tb_crc_ram: self-checking testbench for the CRC-guarded table RAM.
//
// A reference copy of the table and an independent CRC-16/CCITT routine
// (checked first against the standard check value 0x29B1 of "123456789")
// predict everything the RAM must do: the zero fill after reset, the CRC
// words written by a seal, the data streamed by a use pass and the error
// flag. Upsets are injected by flipping bits in the RAM array directly.
// Pass lengths are checked in cycles.
module tb_crc_ram;
  localparam int unsigned DEPTH = 256;
  localparam int unsigned NDATA = DEPTH - 2;
  logic clk = 1'b0, rstn = 1'b0;
  logic wr_en = 1'b0, seal_req = 1'b0, use_req = 1'b0;
  logic [7:0] wr_addr = '0, wr_data = '0;
  logic [7:0] use_data;
  logic use_valid, use_done, busy, sealed, crc_err;
  int checks = 0, failures = 0;
  logic [7:0] ref_tbl [NDATA];
  logic [7:0] got [NDATA];
  int ngot;

  crc_ram #(.DEPTH(DEPTH), .DW(8)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (use_valid) begin
    if (ngot < NDATA) got[ngot] <= use_data;
    ngot <= ngot + 1;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // reference CRC: reflected-free bit loop written on the message bit stream
  function automatic logic [15:0] ref_crc(input int n, input bit zero);
    logic [15:0] r = 16'hFFFF;
    for (int k = 0; k < n; k++) begin
      logic [7:0] b = zero ? 8'h00 : ref_tbl[k];
      for (int i = 0; i < 8; i++) begin
        bit fb = r[15] ^ b[7-i];
        r = r << 1;
        if (fb) r[12] = ~r[12];
        if (fb) r[5]  = ~r[5];
        if (fb) r[0]  = ~r[0];
      end
    end
    return r;
  endfunction

  task automatic wait_idle(output int cycles);
    cycles = 0;
    @(negedge clk);
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  task automatic do_use(output int cycles);
    ngot = 0;
    @(negedge clk); use_req = 1'b1;
    @(negedge clk); use_req = 1'b0;
    cycles = 1;
    while (!use_done) begin @(negedge clk); cycles++; end
  endtask

  task automatic do_seal(output int cycles);
    @(negedge clk); seal_req = 1'b1;
    @(negedge clk); seal_req = 1'b0;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  task automatic check_stream(input string msg);
    bit ok = (ngot == NDATA);
    for (int k = 0; k < NDATA; k++) if (got[k] != ref_tbl[k]) ok = 0;
    check(ok, msg);
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, a;
    logic [15:0] c;
    // the reference CRC itself
    foreach (ref_tbl[k]) ref_tbl[k] = 8'h00;
    for (int k = 0; k < 9; k++) ref_tbl[k] = 8'h31 + 8'(k);
    check(ref_crc(9, 0) == 16'h29B1, "reference CRC check value");
    foreach (ref_tbl[k]) ref_tbl[k] = 8'h00;

    repeat (3) @(negedge clk);
    rstn = 1'b1;
    wait_idle(cyc);
    check(cyc == DEPTH + 1, $sformatf("reset fill + seal takes %0d cycles", cyc));
    check(sealed && !crc_err, "sealed after reset");
    c = ref_crc(NDATA, 1);
    check(dut.mem[NDATA] == c[15:8] && dut.mem[NDATA+1] == c[7:0], "CRC of zero table stored at RAM end");
    do_use(cyc);
    check_stream("zero table streamed");
    check(!crc_err, "zero table passes check");
    check(cyc == DEPTH + 2, $sformatf("use pass takes %0d cycles", cyc));

    for (int round = 0; round < 6; round++) begin
      // load a random table
      for (int k = 0; k < NDATA; k++) begin
        ref_tbl[k] = 8'($urandom());
        @(negedge clk); wr_en = 1'b1; wr_addr = 8'(k); wr_data = ref_tbl[k];
      end
      @(negedge clk); wr_en = 1'b0;
      // writes to the CRC words are refused
      @(negedge clk); wr_en = 1'b1; wr_addr = 8'(NDATA); wr_data = 8'h77;
      @(negedge clk); wr_en = 1'b0;
      check(!sealed, "table write clears sealed");
      do_seal(cyc);
      check(cyc == DEPTH + 2, $sformatf("seal takes %0d cycles", cyc));
      c = ref_crc(NDATA, 0);
      check(sealed && dut.mem[NDATA] == c[15:8] && dut.mem[NDATA+1] == c[7:0], "seal stores CRC");
      do_use(cyc);
      check_stream("table streamed");
      check(!crc_err, "clean table passes check");
      // single-event upset in a data word
      a = $urandom_range(0, NDATA - 1);
      dut.mem[a] = dut.mem[a] ^ (8'h01 << $urandom_range(0, 7));
      do_use(cyc);
      check(crc_err, "upset in data word detected");
      check(got[a] != ref_tbl[a], "corrupted word is what the RAM holds");
      // flag is sticky
      do_use(cyc);
      check(crc_err, "error flag sticky");
      // repair the word and reseal: flag clears
      @(negedge clk); wr_en = 1'b1; wr_addr = 8'(a); wr_data = ref_tbl[a];
      @(negedge clk); wr_en = 1'b0;
      do_seal(cyc);
      check(!crc_err, "reseal clears flag");
      // upset in a stored CRC byte
      a = NDATA + $urandom_range(0, 1);
      dut.mem[a] = dut.mem[a] ^ 8'h10;
      do_use(cyc);
      check(crc_err, "upset in stored CRC detected");
      do_seal(cyc);
      do_use(cyc);
      check(!crc_err, "clean again after reseal");
    end
    // requests while busy are ignored, the pass completes once
    @(negedge clk); use_req = 1'b1;
    @(negedge clk); seal_req = 1'b1; use_req = 1'b0;
    @(negedge clk); seal_req = 1'b0;
    wait_idle(cyc);
    check(cyc < DEPTH + 2, "request during pass ignored");
    // reset clears the table to zeros
    @(negedge clk); rstn = 1'b0;
    @(negedge clk); rstn = 1'b1;
    wait_idle(cyc);
    foreach (ref_tbl[k]) ref_tbl[k] = 8'h00;
    do_use(cyc);
    check_stream("reset restores zero table");
    check(!crc_err, "reset clears flag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
