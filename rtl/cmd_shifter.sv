// cmd_shifter: command input shift register, the only logic outside the
// soft reset.
//
// Command bits arrive serially, MSB first, one per cycle in which
// bit_vld is high. They are shifted into a FRAME_BITS-long register. A
// frame is complete when at least FRAME_BITS bits have been shifted since
// the previous frame and the oldest byte equals the sync byte. A complete
// frame is then held on "frame" until the next one arrives.
//   - If it is the reset command (reset opcode, the reset key as argument
//     and a correct checksum) soft_req pulses for one cycle. The frame is
//     not handed on: the control part is not woken for it.
//   - Any other frame pulses frame_vld, which opens the control part's
//     reset window. Judging its validity is left to the control part.
// Because this block is reset only by hw_rstn, a reset command can always
// be received, even while the rest of the chip is held in soft reset.
//
// Timing: soft_req / frame_vld pulse in the cycle after the last bit of a
// frame was shifted in.
//
// The paper names a shifter used for command reset that the soft reset
// must spare; the serial format, sync byte, reset key and checksum are
// this design's own choice.
module cmd_shifter
  import fee_pkg::*;
(
  input  logic       clk,
  input  logic       hw_rstn,
  input  logic       bit_in,
  input  logic       bit_vld,
  output cmd_frame_t frame,
  output logic       frame_vld,
  output logic       soft_req
);
  localparam int unsigned CNTW = $clog2(FRAME_BITS + 1);

  logic [FRAME_BITS-2:0] sr;          // the bits before the newest one
  logic [FRAME_BITS-1:0] sr_nxt;
  logic [CNTW-1:0]       nbits;       // bits since the last frame, saturating
  cmd_frame_t            cand;
  logic                  is_frame, is_reset;

  always_comb begin
    sr_nxt   = {sr, bit_in};
    cand     = cmd_frame_t'(sr_nxt);
    is_frame = bit_vld && (32'(nbits) >= FRAME_BITS - 1) && (cand.sync == CMD_SYNC);
    is_reset = (cand.op == OP_RESET) && (cand.arg == RESET_KEY) &&
               (cand.chk == frame_checksum(cand.op, cand.arg));
  end

  always_ff @(posedge clk or negedge hw_rstn) begin
    if (!hw_rstn) begin
      sr        <= '0;
      nbits     <= '0;
      frame     <= '0;
      frame_vld <= 1'b0;
      soft_req  <= 1'b0;
    end else begin
      frame_vld <= 1'b0;
      soft_req  <= 1'b0;
      if (bit_vld) begin
        sr <= sr_nxt[FRAME_BITS-2:0];
        if (is_frame) begin
          nbits <= '0;
          if (is_reset) begin
            soft_req <= 1'b1;
          end else begin
            frame     <= cand;
            frame_vld <= 1'b1;
          end
        end else if (32'(nbits) < FRAME_BITS) begin
          nbits <= nbits + 1'b1;
        end
      end
    end
  end
endmodule
