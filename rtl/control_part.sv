// control_part: the command handling procedure.
//
// The whole part sits in reset (rstn = cmd_path_rstn low) while no command
// is pending. When the reset manager releases it, the state machine runs
// the procedure once, step by step, and then parks in S_DONE raising
// "done", upon which the reset manager puts it back to sleep:
//   S_ANALYSE  judge validity: sync byte, checksum, known opcode
//   S_EXEC     execute: write va_cfgreg, write a table word, start a table
//              seal or use pass, or select an engineering parameter
//   S_WAIT     wait for the table pass started in S_EXEC to finish
//   S_RESP     emit one response word {opcode, status, value}
//   S_DONE     report completion
// If an upset leaves the machine stuck (for example waiting for a table
// pass that never comes), the reset manager's command timeout resets it.
//
// Interface: "frame" is the command held by the command shifter. The table
// and va_cfgreg ports go to the status manager; eng_idx/eng_word read the
// monitor part's engineering parameters (eng_word is combinational from
// eng_idx). resp/resp_valid is a one-cycle response strobe.
// The data fields (cfg_data, tbl_wr_addr/data, eng_idx) are wired straight
// from the held frame; the part itself only drives the strobes, so they are
// meaningful only while a strobe is high.
// Timing: WR_CFG, WR_TBL and RD_ENG take 4 cycles from reset release to
// done; a seal or use pass adds the table pass time.
//
// The paper gives the steps (analysis, validity, execution, response);
// the command set, the response format and the timing are this design's.
module control_part
  import fee_pkg::*;
(
  input  logic        clk,
  input  logic        rstn,
  input  cmd_frame_t  frame,
  // va_cfgreg write
  output logic        cfg_wr,
  output logic [15:0] cfg_data,
  // table RAM
  output logic        tbl_wr_en,
  output logic [7:0]  tbl_wr_addr,
  output logic [7:0]  tbl_wr_data,
  output logic        tbl_seal_req,
  output logic        tbl_use_req,
  input  logic        tbl_busy,
  input  logic        tbl_use_done,
  input  logic        tbl_crc_err,
  // engineering parameters
  output logic [7:0]  eng_idx,
  input  logic [15:0] eng_word,
  // response
  output resp_t       resp,
  output logic        resp_valid,
  output logic        done
);
  ctrl_state_e state;
  logic [7:0]  status;
  logic [15:0] value;
  logic        pass_seen;   // table pass has started (busy seen high)

  always_comb begin
    cfg_wr       = (state == S_EXEC) && (frame.op == OP_WR_CFG);
    cfg_data     = frame.arg;
    tbl_wr_en    = (state == S_EXEC) && (frame.op == OP_WR_TBL) && !tbl_busy;
    tbl_wr_addr  = frame.arg[15:8];
    tbl_wr_data  = frame.arg[7:0];
    tbl_seal_req = (state == S_EXEC) && (frame.op == OP_SEAL_TBL) && !tbl_busy;
    tbl_use_req  = (state == S_EXEC) && (frame.op == OP_USE_TBL)  && !tbl_busy;
    eng_idx      = frame.arg[7:0];
  end

  always_ff @(posedge clk or negedge rstn) begin
    if (!rstn) begin
      state      <= S_ANALYSE;
      status     <= ST_OK;
      value      <= '0;
      pass_seen  <= 1'b0;
      resp       <= '0;
      resp_valid <= 1'b0;
      done       <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      unique case (state)
        S_ANALYSE: begin
          value <= frame.arg;
          if (frame.sync != CMD_SYNC ||
              frame.chk != frame_checksum(frame.op, frame.arg)) begin
            status <= ST_BAD_CHK;
            state  <= S_RESP;
          end else if (!(frame.op inside {OP_WR_CFG, OP_WR_TBL, OP_SEAL_TBL,
                                          OP_USE_TBL, OP_RD_ENG})) begin
            status <= ST_BAD_OP;
            state  <= S_RESP;
          end else begin
            status <= ST_OK;
            state  <= S_EXEC;
          end
        end
        S_EXEC: begin
          unique case (frame.op)
            OP_WR_CFG:  state <= S_RESP;
            OP_RD_ENG:  begin value <= eng_word; state <= S_RESP; end
            OP_WR_TBL:  if (!tbl_busy) state <= S_RESP;
            default:    if (!tbl_busy) state <= S_WAIT;   // seal / use
          endcase
          pass_seen <= 1'b0;
        end
        S_WAIT: begin
          if (tbl_busy) pass_seen <= 1'b1;
          if (frame.op == OP_USE_TBL) begin
            if (tbl_use_done) begin
              status <= tbl_crc_err ? ST_CRC_ERR : ST_OK;
              state  <= S_RESP;
            end
          end else if (pass_seen && !tbl_busy) begin
            state <= S_RESP;
          end
        end
        S_RESP: begin
          resp       <= '{op: frame.op, status: status, value: value};
          resp_valid <= 1'b1;
          state      <= S_DONE;
        end
        S_DONE: done <= 1'b1;
        default: state <= S_DONE;
      endcase
    end
  end
  // Exactly one response per procedure: none once done is raised.
  a_one_resp: assert property (@(posedge clk) disable iff (!rstn)
    done |=> !resp_valid);
endmodule
