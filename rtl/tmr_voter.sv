// tmr_voter: bitwise two-out-of-three majority voter.
//
// Each output bit is the value held by at least two of the three inputs,
// so a single corrupted replica never reaches the output. It is purely
// combinational. This is the "voter" block of the TMR structure; the
// majority function is the one the TMR scheme prescribes, the gate-level
// form (AND-OR) is this design's choice.
module tmr_voter #(
  parameter int unsigned WIDTH = 16
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic [WIDTH-1:0] c,
  output logic [WIDTH-1:0] y
);
  always_comb y = (a & b) | (a & c) | (b & c);
endmodule
