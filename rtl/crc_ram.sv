// crc_ram: table RAM whose contents are guarded by a CRC stored at its end.
//
// The RAM holds DEPTH words of DW bits. The last two words hold a CRC-16
// of the data words 0 .. DEPTH-3 (high byte at DEPTH-2, low byte at
// DEPTH-1). The CRC is computed once, when the table is sealed, and the
// table is checked every time it is used: a "use" pass reads the whole
// RAM in order, streams the data words out, recomputes the CRC on the way
// and compares it with the stored one. A mismatch (a corrupted word, for
// instance by a single-event upset in the RAM) sets the sticky indicator
// crc_err, which stays set until the table is sealed again (rewritten) or
// the block is reset. After reset the block fills the RAM with zeros and
// seals it, so the RAM always starts from a known, consistent default.
//
// Interface
//   wr_en/wr_addr/wr_data  write one data word (idle only); clears "sealed"
//   seal_req               compute the CRC of the data words and store it
//   use_req                stream the table out on use_data/use_valid and
//                          check it; use_done pulses when the check is done
//   busy                   a fill, seal or use pass is running; requests
//                          and writes are ignored meanwhile
// Timing: one RAM read per cycle with one cycle of read latency. A seal
// and a use pass each take DEPTH+2 cycles from request to the end (busy
// low, use_done), the reset fill and seal DEPTH+1
// cycles.
//
// Follows the paper: a CRC computed in advance and attached at the end of
// the RAM, recomputed when the data is used, and a mismatch indicator bit.
// The polynomial (CRC-16/CCITT), the word width (8 bits of the 256x9 RAM
// block) and the seal/use handshake are this design's choice.
module crc_ram
  import fee_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned DW    = 8,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rstn,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data,
  input  logic          seal_req,
  input  logic          use_req,
  output logic [DW-1:0] use_data,
  output logic          use_valid,
  output logic          use_done,
  output logic          busy,
  output logic          sealed,
  output logic          crc_err
);
  localparam int unsigned NDATA = DEPTH - 2;   // data words; CRC follows

  typedef enum logic [2:0] {S_FILL, S_IDLE, S_SEAL, S_WR_HI, S_WR_LO, S_USE} state_e;
  state_e state;

  logic [DW-1:0] mem [DEPTH];                  // the RAM block (no reset)

  logic          we;
  logic [AW-1:0] waddr;
  logic [DW-1:0] wdata;
  logic          re;
  logic [AW-1:0] raddr;
  logic [DW-1:0] rdata;
  logic          re_q;                         // rdata is valid this cycle
  logic [AW-1:0] ridx_q;                       // address rdata came from

  logic [AW:0]   cnt;                          // sweep address counter
  logic [15:0]   crc, crc_nxt;
  logic [7:0]    stored_hi;

  // --- RAM: one write port, one synchronous read port
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

  always_comb crc_nxt = crc16_byte(crc, 8'(rdata));

  // --- write and read port control
  always_comb begin
    we    = 1'b0;
    waddr = wr_addr;
    wdata = wr_data;
    re    = 1'b0;
    raddr = cnt[AW-1:0];
    unique case (state)
      S_FILL:  begin we = 1'b1; waddr = cnt[AW-1:0]; wdata = '0; end
      S_IDLE:  we = wr_en && (32'(wr_addr) < NDATA);
      S_SEAL:  re = (32'(cnt) < NDATA);
      S_WR_HI: begin we = 1'b1; waddr = AW'(NDATA);     wdata = DW'(crc[15:8]); end
      S_WR_LO: begin we = 1'b1; waddr = AW'(NDATA + 1); wdata = DW'(crc[7:0]);  end
      S_USE:   re = (32'(cnt) < DEPTH);
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rstn) begin
    if (!rstn) begin
      state     <= S_FILL;
      cnt       <= '0;
      crc       <= CRC_INIT;
      stored_hi <= '0;
      re_q      <= 1'b0;
      ridx_q    <= '0;
      sealed    <= 1'b0;
      crc_err   <= 1'b0;
      use_data  <= '0;
      use_valid <= 1'b0;
      use_done  <= 1'b0;
    end else begin
      re_q      <= re;
      ridx_q    <= raddr;
      use_valid <= 1'b0;
      use_done  <= 1'b0;
      unique case (state)
        S_FILL: begin                          // default contents: all zero
          if (32'(cnt) < NDATA) crc <= crc16_byte(crc, 8'h00);
          if (32'(cnt) == DEPTH - 1) begin
            // the CRC of the zero-filled data words is written next
            cnt   <= '0;
            state <= S_WR_HI;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_IDLE: begin
          cnt <= '0;
          crc <= CRC_INIT;
          if (wr_en && (32'(wr_addr) < NDATA)) sealed <= 1'b0;
          if (seal_req)     state <= S_SEAL;
          else if (use_req) state <= S_USE;
        end
        S_SEAL: begin
          if (re) cnt <= cnt + 1'b1;
          if (re_q) begin
            crc <= crc_nxt;
            if (32'(ridx_q) == NDATA - 1) state <= S_WR_HI;
          end
        end
        S_WR_HI: state <= S_WR_LO;
        S_WR_LO: begin
          state   <= S_IDLE;
          sealed  <= 1'b1;
          crc_err <= 1'b0;                     // table freshly (re)configured
        end
        S_USE: begin
          if (re) cnt <= cnt + 1'b1;
          if (re_q) begin
            if (32'(ridx_q) < NDATA) begin
              crc       <= crc_nxt;
              use_data  <= rdata;
              use_valid <= 1'b1;
            end else if (32'(ridx_q) == NDATA) begin
              stored_hi <= 8'(rdata);
            end else begin
              if ({stored_hi, 8'(rdata)} != crc) crc_err <= 1'b1;
              use_done <= 1'b1;
              state    <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // use_done comes only out of a use pass.
  a_use_done: assert property (@(posedge clk) disable iff (!rstn)
    state != S_USE |=> !use_done);

endmodule
