// tmr_reg: triple-modular-redundant register with correction (write-back).
//
// Three replica flip-flop banks hold the same value; a majority voter
// forms the output "result". A 2:1 multiplexer in front of every replica
// chooses its next value: the outside data when "select" is high (a write),
// otherwise the voter result. Because the voter result is written back
// into all three replicas on every clock edge, a single-event upset in one
// replica is outvoted at once and repaired on the next edge, so upsets do
// not accumulate over time.
//
// Interface: d/select write the register (value visible on q one cycle
// later); q is the voted result. rstn is an asynchronous active-low reset
// to RESET_VALUE.
//
// Follows the paper's TMR-with-write-back register (replicas, voter, the
// per-replica mux and the write-back path). The polarity of "select"
// (high = load outside data) and the reset value are this design's choice.
// In a real FPGA flow the replicas must also be kept apart physically; that
// is a placement constraint and is not expressed here.
module tmr_reg #(
  parameter int unsigned     WIDTH       = 16,
  parameter logic [WIDTH-1:0] RESET_VALUE = '0
) (
  input  logic             clk,
  input  logic             rstn,
  input  logic             select,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  // The three replicas. They are logically identical, so a synthesis tool
  // that merges equivalent flip-flops will fold them into one unless told
  // not to: keep is the generic hint, the FPGA tool's own "preserve"
  // attribute or constraint must be applied as well (some tools, yosys's
  // opt_merge among them, merge them despite keep).
  (* keep *) logic [WIDTH-1:0] rep0;
  (* keep *) logic [WIDTH-1:0] rep1;
  (* keep *) logic [WIDTH-1:0] rep2;
  logic [WIDTH-1:0] voted;

  tmr_voter #(.WIDTH(WIDTH)) u_voter (.a(rep0), .b(rep1), .c(rep2), .y(voted));

  always_ff @(posedge clk or negedge rstn) begin
    if (!rstn) rep0 <= RESET_VALUE;
    else       rep0 <= select ? d : voted;
  end

  always_ff @(posedge clk or negedge rstn) begin
    if (!rstn) rep1 <= RESET_VALUE;
    else       rep1 <= select ? d : voted;
  end

  always_ff @(posedge clk or negedge rstn) begin
    if (!rstn) rep2 <= RESET_VALUE;
    else       rep2 <= select ? d : voted;
  end

  assign q = voted;
endmodule
