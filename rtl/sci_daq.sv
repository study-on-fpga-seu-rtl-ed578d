// sci_daq: the scientific data acquisition procedure.
//
// Like the control part, this part sleeps in reset (rstn = sci_path_rstn
// low) until a trigger is accepted, runs one acquisition and reports done:
//   SD_ACQ   read channel 0 .. NCH-1 from the peripheral ADC with a
//           request/acknowledge handshake and cache each sample
//   SD_SEND  send the packet: header word, trigger number, NCH samples,
//           over a valid/ready word stream (ready low stalls it)
//   SD_DONE  raise done; the reset manager then resets the part
// A peripheral that never answers, or a receiver that never takes the
// data, leaves the part waiting; the reset manager's science timeout then
// resets it, so the next trigger starts clean.
//
// Interface: adc_req is held with adc_ch until adc_ack, which carries
// adc_data. trig_no is sampled in the first cycle after reset release.
// Timing: NCH*(ADC latency + 1) cycles to acquire, then NCH+2 words at up
// to one per cycle, then one cycle to done.
//
// The paper gives the steps (triggered, read the peripheral chips, cache,
// package, send); the packet format, the ADC handshake and the channel
// count are this design's own.
module sci_daq
  import fee_pkg::*;
#(
  parameter int unsigned NCH = 16,
  localparam int unsigned CHW = (NCH > 1) ? $clog2(NCH) : 1
) (
  input  logic           clk,
  input  logic           rstn,
  input  logic [15:0]    trig_no,
  output logic           adc_req,
  output logic [CHW-1:0] adc_ch,
  input  logic           adc_ack,
  input  logic [15:0]    adc_data,
  output logic [15:0]    sci_data,
  output logic           sci_valid,
  input  logic           sci_ready,
  output logic           done
);
  typedef enum logic [1:0] {SD_ACQ, SD_SEND, SD_DONE} state_e;
  state_e        state;
  logic [15:0]   cache [NCH];          // event buffer
  logic [CHW:0]  idx;                  // channel / word index
  logic [15:0]   trig_q;
  logic          first;

  assign adc_req = (state == SD_ACQ) && !first;
  assign adc_ch  = idx[CHW-1:0];

  // packet word idx: 0 header, 1 trigger number, 2.. samples
  always_comb begin
    sci_valid = (state == SD_SEND);
    if (idx == '0)                 sci_data = SCI_HEADER;
    else if (idx == (CHW+1)'(1))   sci_data = trig_q;
    else                           sci_data = cache[CHW'(idx - 2'd2)];
  end

  always_ff @(posedge clk) begin
    if (state == SD_ACQ && !first && adc_ack) cache[adc_ch] <= adc_data;
  end

  always_ff @(posedge clk or negedge rstn) begin
    if (!rstn) begin
      state  <= SD_ACQ;
      idx    <= '0;
      trig_q <= '0;
      first  <= 1'b1;
      done   <= 1'b0;
    end else begin
      first <= 1'b0;
      if (first) trig_q <= trig_no;
      unique case (state)
        SD_ACQ: if (!first && adc_ack) begin
          if (32'(idx) == NCH - 1) begin
            idx   <= '0;
            state <= SD_SEND;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        SD_SEND: if (sci_ready) begin
          if (32'(idx) == NCH + 1) state <= SD_DONE;
          else                     idx   <= idx + 1'b1;
        end
        SD_DONE: done <= 1'b1;
        default: state <= SD_DONE;
      endcase
    end
  end
  // Stream rule: once offered, a word stays put until it is taken.
  a_sci_stable: assert property (@(posedge clk) disable iff (!rstn)
    sci_valid && !sci_ready |=> sci_valid && $stable(sci_data));
  // ADC rule: a request is held, on the same channel, until acknowledged.
  a_adc_hold: assert property (@(posedge clk) disable iff (!rstn)
    adc_req && !adc_ack |=> adc_req && $stable(adc_ch));
endmodule
