// tb_sci_daq: self-checking testbench for the science data acquisition
// procedure.
//
// Each event is run as the reset manager runs it: the part is released
// from reset with a trigger number, must read every channel from a model
// ADC, send header, trigger number and samples, and raise done. The model
// ADC answers after a random latency with data derived from (event,
// channel); the receiver's ready is random, so the packet stream stalls.
// A fast event (no ADC latency, ready always high) checks the procedure
// length in cycles: 2*NCH+4 from reset release to done.
module tb_sci_daq;
  import fee_pkg::*;
  localparam int unsigned NCH = 16;
  logic clk = 1'b0, rstn = 1'b0;
  logic [15:0] trig_no = '0;
  logic adc_req, adc_ack; logic [3:0] adc_ch; logic [15:0] adc_data;
  logic [15:0] sci_data; logic sci_valid, sci_ready, done;
  int checks = 0, failures = 0;
  int ev = 0, lat_max = 0, ready_pct = 100;
  int lat_cnt = 0;
  logic [15:0] pkt [$];
  int n_stall = 0;

  sci_daq #(.NCH(NCH)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [15:0] sample(input int e, input int ch);
    return 16'(e * 131 + ch * 7 + 16'h0300);
  endfunction

  // ADC model: acknowledges a held request after lat_cnt extra cycles
  always_comb begin
    adc_ack  = adc_req && (lat_cnt == 0);
    adc_data = sample(ev, int'(adc_ch));
  end
  always @(posedge clk) begin
    if (adc_req && lat_cnt > 0) lat_cnt <= lat_cnt - 1;
    else if (adc_ack || !adc_req) lat_cnt <= $urandom_range(0, lat_max);
    sci_ready <= ($urandom_range(1, 100) <= ready_pct);
    if (sci_valid && sci_ready) pkt.push_back(sci_data);
    if (sci_valid && !sci_ready) n_stall++;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run_event(output int cycles);
    @(negedge clk); rstn = 0; trig_no = 16'($urandom()); pkt.delete();
    @(negedge clk); rstn = 1;
    cycles = 0;
    while (!done && cycles < 5000) begin @(negedge clk); cycles++; end
    @(negedge clk); rstn = 0;
    check(pkt.size() == NCH + 2, $sformatf("packet length %0d", pkt.size()));
    if (pkt.size() == NCH + 2) begin
      bit ok = (pkt[0] == SCI_HEADER) && (pkt[1] == trig_no);
      for (int c = 0; c < NCH; c++) if (pkt[2 + c] != sample(ev, c)) ok = 0;
      check(ok, "packet contents");
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    sci_ready = 1;
    repeat (3) @(negedge clk);
    check(!adc_req && !sci_valid && !done, "quiet in reset");
    // fast event: exact length
    lat_max = 0; ready_pct = 100; ev = 1;
    run_event(cyc);
    check(cyc == 2 * NCH + 4, $sformatf("fast event takes %0d cycles", cyc));
    // random latency and back-pressure
    lat_max = 4; ready_pct = 60;
    for (ev = 2; ev < 60; ev++) run_event(cyc);
    check(n_stall > 0, "back-pressure exercised");
    // a hung receiver leaves the part waiting (the watchdog's job)
    ready_pct = 0; lat_max = 0; ev = 99;
    @(negedge clk); rstn = 0;
    @(negedge clk); rstn = 1;
    repeat (200) @(negedge clk);
    check(!done && sci_valid, "waits for the receiver, no false done");
    @(negedge clk); rstn = 0;
    @(negedge clk);
    check(!sci_valid && !adc_req, "reset clears the hung procedure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
