// reset_manager: multi-domain, multi-level reset generation.
//
// Four active-low resets nest inside each other:
//   hw_rstn        from the external reset chip; resets everything,
//                  including the command shifter and this block.
//   soft_rstn      low while hw_rstn is low, and for SOFT_RST_CYCLES
//                  cycles after a reset command (soft_req). It resets all
//                  logic except the command shifter.
//   cmd_path_rstn  releases the control part only while a command is being
//                  handled: it goes high on cmd_start and low again when
//                  the control part reports cmd_done, or when the command
//                  has not finished within CMD_TIMEOUT cycles.
//   sci_path_rstn  the same for the science data acquisition part, opened
//                  by sci_start (an accepted trigger), closed by sci_done
//                  or after SCI_TIMEOUT cycles.
// Holding an idle part in reset keeps upsets from collecting in it between
// procedures, and the timeouts break any hang (for example an upset that
// sends a state machine into a loop) by resetting only the part concerned.
// cmd_timeout / sci_timeout pulse for one cycle when a timeout fired.
// A start that arrives while the domain is still busy is ignored; the
// accepted-start pulses cmd_accept / sci_accept tell the rest of the design
// which starts were taken.
//
// Timing: a path reset rises one clock after its start pulse and falls one
// clock after done (or the timeout), so a part is held in reset for at
// least one cycle between two procedures. soft_rstn rises one clock after
// hw_rstn.
//
// Follows the paper: the four reset signals, their scope, the watchdog
// timer per procedure and the idle parts held in reset. The timeout
// lengths, the soft reset length and the handshake are this design's own.
module reset_manager #(
  parameter int unsigned SOFT_RST_CYCLES = 16,
  parameter int unsigned CMD_TIMEOUT     = 1024,
  parameter int unsigned SCI_TIMEOUT     = 8192
) (
  input  logic clk,
  input  logic hw_rstn,
  input  logic soft_req,
  input  logic cmd_start,
  input  logic cmd_done,
  input  logic sci_start,
  input  logic sci_done,
  output logic soft_rstn,
  output logic cmd_path_rstn,
  output logic sci_path_rstn,
  output logic cmd_accept,
  output logic sci_accept,
  output logic cmd_timeout,
  output logic sci_timeout
);
  localparam int unsigned SW = $clog2(SOFT_RST_CYCLES + 1);
  localparam int unsigned CW = $clog2(CMD_TIMEOUT + 1);
  localparam int unsigned TW = $clog2(SCI_TIMEOUT + 1);

  logic [SW-1:0] soft_cnt;
  logic [CW-1:0] cmd_timer;
  logic [TW-1:0] sci_timer;

  // ---- soft reset: only the hardware reset clears this generator
  always_ff @(posedge clk or negedge hw_rstn) begin
    if (!hw_rstn) begin
      soft_cnt  <= '0;
      soft_rstn <= 1'b0;
    end else if (soft_req) begin
      soft_cnt  <= SW'(SOFT_RST_CYCLES);
      soft_rstn <= 1'b0;
    end else if (soft_cnt != '0) begin
      soft_cnt  <= soft_cnt - 1'b1;
      soft_rstn <= 1'b0;
    end else begin
      soft_rstn <= 1'b1;
    end
  end

  assign cmd_accept = cmd_start && !cmd_path_rstn && soft_rstn;
  assign sci_accept = sci_start && !sci_path_rstn && soft_rstn;

  // ---- command path window and watchdog
  always_ff @(posedge clk or negedge soft_rstn) begin
    if (!soft_rstn) begin
      cmd_path_rstn <= 1'b0;
      cmd_timer     <= '0;
      cmd_timeout   <= 1'b0;
    end else begin
      cmd_timeout <= 1'b0;
      if (!cmd_path_rstn) begin
        cmd_timer <= '0;
        if (cmd_accept) cmd_path_rstn <= 1'b1;
      end else if (cmd_done) begin
        cmd_path_rstn <= 1'b0;
      end else if (32'(cmd_timer) == CMD_TIMEOUT - 1) begin
        cmd_path_rstn <= 1'b0;
        cmd_timeout   <= 1'b1;
      end else begin
        cmd_timer <= cmd_timer + 1'b1;
      end
    end
  end

  // ---- science path window and watchdog
  always_ff @(posedge clk or negedge soft_rstn) begin
    if (!soft_rstn) begin
      sci_path_rstn <= 1'b0;
      sci_timer     <= '0;
      sci_timeout   <= 1'b0;
    end else begin
      sci_timeout <= 1'b0;
      if (!sci_path_rstn) begin
        sci_timer <= '0;
        if (sci_accept) sci_path_rstn <= 1'b1;
      end else if (sci_done) begin
        sci_path_rstn <= 1'b0;
      end else if (32'(sci_timer) == SCI_TIMEOUT - 1) begin
        sci_path_rstn <= 1'b0;
        sci_timeout   <= 1'b1;
      end else begin
        sci_timer <= sci_timer + 1'b1;
      end
    end
  end

  // A timeout always closes its window, and a closed window is never
  // reported as timed out again.
  a_cmd_to: assert property (@(posedge clk) disable iff (!hw_rstn || !soft_rstn)
    cmd_timeout |-> !cmd_path_rstn);
  a_sci_to: assert property (@(posedge clk) disable iff (!hw_rstn || !soft_rstn)
    sci_timeout |-> !sci_path_rstn);
endmodule
