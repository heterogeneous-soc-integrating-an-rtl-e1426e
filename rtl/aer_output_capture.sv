// aer_output_capture -- receives ReckOn's inference result and keeps the
// per-epoch accuracy counter.
//
// At the end of each sample ReckOn reports the address of its winning output
// neuron on the 8-bit OUT_DATA bus with a 4-phase handshake (OUT_REQ from
// ReckOn, OUT_ACK back). While `enable` is high this block answers that
// handshake: it latches OUT_DATA and raises OUT_ACK when OUT_REQ rises, and
// drops OUT_ACK once OUT_REQ has fallen, pulsing `done` in that cycle. The
// latched result is compared with the sample's label; a match increments the
// running count of correct inferences. `epoch_close` copies that count to
// EPOCH_ACC, which is what the logic analyser samples, and clears it.
//
// Timing: OUT_ACK rises one clock after OUT_REQ is seen high and falls one
// clock after OUT_REQ is seen low; `done` and the counter update come with
// the fall of OUT_ACK. An `epoch_close` in the same cycle as `done` includes
// that sample's result.
//
// What follows the design: the 4-phase handshake, the label comparison and
// the sample-and-reset of the counter at the end of an epoch. The counter
// width and the exact cycle timing are this design's choice.
module aer_output_capture
  import reckon_soc_pkg::*;
#(
  parameter int unsigned ACC_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enable,       // decoder waits for the result
  input  logic [AER_W-1:0] label,        // correct label of the current sample
  input  logic             epoch_close,  // sample and reset the counter
  // ReckOn output channel
  input  logic [AER_W-1:0] out_data,
  input  logic             out_req,
  output logic             out_ack,
  // results
  output logic             done,         // handshake complete (1-cycle pulse)
  output logic             correct,      // with done: result matched the label
  output logic [AER_W-1:0] result,       // last received result
  output logic [ACC_W-1:0] acc_cnt,      // correct inferences so far in this epoch
  output logic [ACC_W-1:0] epoch_acc     // EPOCH_ACC: count of the last closed epoch
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_ack <= 1'b0;
      result  <= '0;
    end else if (!out_ack) begin
      if (enable && out_req) begin
        out_ack <= 1'b1;
        result  <= out_data;
      end
    end else if (!out_req) begin
      out_ack <= 1'b0;
    end
  end

  assign done    = out_ack && !out_req;
  assign correct = (result == label);

  wire [ACC_W-1:0] acc_next = acc_cnt + ACC_W'(done && correct);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_cnt   <= '0;
      epoch_acc <= '0;
    end else if (epoch_close) begin
      epoch_acc <= acc_next;
      acc_cnt   <= '0;
    end else begin
      acc_cnt   <= acc_next;
    end
  end

endmodule
