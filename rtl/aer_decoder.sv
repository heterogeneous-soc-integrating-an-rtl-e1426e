// aer_decoder -- the finite-state machine that plays a dataset, stored as
// event words in the buffer memory, into the ReckOn accelerator, one sample
// at a time, and hands batches and epochs back to the ARM controller.
//
// Operation. NEW_EPOCH (rising edge, from a GPIO) starts reading at word 0
// of the buffer (READ). Each word is decoded by its code:
//   spike (8'h03)  TICK issues TIME_TICK pulses until the sample's tick count
//                  reaches the word's target tick, then SPIKE sends the
//                  neuron address on AERIN_ADDR with a 4-phase REQ/ACK
//                  handshake;
//   label (8'h02)  LABEL sends the label on AERIN_ADDR with AERIN_TAR_EN high
//                  (same handshake) and keeps it for the accuracy count;
//   end   (8'h01)  END_S ticks up to the sample's last tick, lowers SAMPLE
//                  and waits for ReckOn's inference on OUT_DATA
//                  (see aer_output_capture).
// SAMPLE is raised with the first word of every sample. After END_S the
// sample counters advance; when the batch (SPI_BATCH_SIZE samples) or the
// epoch (SPI_N_SAMPLES samples) is complete the FSM enters END_B and raises
// BATCH_DONE, otherwise it reads the next sample. In END_B it either waits
// for NEW_BATCH (the controller has refilled the buffer; reading restarts at
// word 0) or, if the epoch is complete, goes to END_E: the accuracy counter
// is sampled into EPOCH_ACC and cleared, the epoch counter advances and
// EPOCH_DONE is raised. END_E goes back to READ (word 0) on NEW_EPOCH, or to
// IDLE once SPI_N_EPOCHS epochs have run and STOP is high.
// While SAMPLE is high and the tick count has reached SPI_LABEL_DELAY,
// INFER_ACC is high, and so is TARGET_VALID unless TEST marks the data as a
// validation/test set, so that ReckOn learns only on training data.
//
// Interface. Buffer port: mem_en/mem_addr, data on mem_rdata one clock
// later. GPIO: new_epoch, new_batch, test, stop in; epoch_done, batch_done
// out (levels, high in END_E and END_B). Parameters: `prm` from the SPI
// bank. ReckOn: AER input channel, SAMPLE, TARGET_VALID, INFER_ACC,
// TIME_TICK, TIMING_ERROR_RDY, and the OUT_DATA channel. EPOCH_ACC for the
// logic analyser. AERIN_*, SAMPLE, TIME_TICK and OUT_ACK come straight from
// flip-flops; INFER_ACC, TARGET_VALID and the GPIO levels are decoded from
// flip-flops and the parameter registers.
//
// Timing. A word costs two clocks in READ (address, then data). A spike or
// label costs the handshake: REQ rises on entry, falls the clock after ACK
// is seen, and the FSM leaves once ACK is seen low. Ticks follow
// aer_tick_gen.
//
// What follows the design: the event-word format, the states and their
// order, the GPIO signals, the five SPI parameters, SAMPLE, TIME_TICK,
// TIMING_ERROR_RDY, TARGET_VALID, INFER_ACC, the 4-phase handshakes and
// EPOCH_ACC. This design's own choices: the two-clock memory read, the
// rising-edge detection of NEW_EPOCH/NEW_BATCH, that END_S ticks up to the
// sample's last tick before lowering SAMPLE, that END_S returns straight to
// READ when the batch is not yet complete, the label-delay gating of
// TARGET_VALID/INFER_ACC, that the 8 LSBs of the 12-bit field drive
// AERIN_ADDR, and that unknown codes are skipped.
//
// Lint notes. The capture block's `correct`, `result` and `acc_cnt` outputs
// are left open here: the decoder needs only the handshake and EPOCH_ACC,
// the others exist for the block's own test. The handshake assertions at
// the end use rst_n in `disable iff`, which a linter reports as a reset used
// both asynchronously and synchronously; assertions are not synthesised.
module aer_decoder
  import reckon_soc_pkg::*;
#(
  parameter int unsigned ADDR_W = 14,   // buffer word-address width
  parameter int unsigned ACC_W  = 16    // EPOCH_ACC width
) (
  input  logic              clk,
  input  logic              rst_n,
  // buffer memory (read port)
  output logic              mem_en,
  output logic [ADDR_W-1:0] mem_addr,
  input  logic [WORD_W-1:0] mem_rdata,
  // GPIO
  input  logic              new_epoch,
  input  logic              new_batch,
  input  logic              test,
  input  logic              stop,
  output logic              epoch_done,
  output logic              batch_done,
  // run-time parameters (SPI bank)
  input  spi_params_t       prm,
  // ReckOn: AER input channel
  output logic [AER_W-1:0]  aerin_addr,
  output logic              aerin_req,
  input  logic              aerin_ack,
  output logic              aerin_tar_en,
  // ReckOn: control
  output logic              sample,
  output logic              target_valid,
  output logic              infer_acc,
  output logic              time_tick,
  input  logic              timing_error_rdy,
  // ReckOn: output channel
  input  logic [AER_W-1:0]  out_data,
  input  logic              out_req,
  output logic              out_ack,
  // logic analyser
  output logic [ACC_W-1:0]  epoch_acc,
  // status (debug)
  output dec_state_e        state_o,
  output logic [PRM_W-1:0]  cnt_epochs_o
);

  dec_state_e        state;
  logic              rd_wait;        // READ: data of mem_addr arrives this clock
  logic              hs_ack_seen;    // SPIKE/LABEL: ACK has been seen high
  logic              end_wait;       // END_S: SAMPLE lowered, waiting for the result
  logic [TICK_W-1:0] target_tick;
  logic [AER_W-1:0]  label_q;
  logic [PRM_W-1:0]  cnt_sample_batch, cnt_sample_epoch, cnt_epochs;
  logic              new_epoch_q, new_batch_q;

  wire new_epoch_rise = new_epoch && !new_epoch_q;
  wire new_batch_rise = new_batch && !new_batch_q;

  ev_word_t word;
  assign word = ev_word_t'(mem_rdata);

  // ---------------------------------------------------------------- ticks
  logic              tick_clear, tick_advance, tick_fire;
  logic [TICK_W-1:0] curr_tick;

  aer_tick_gen u_tick (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (tick_clear),
    .advance   (tick_advance),
    .timing    (prm.timing),
    .rdy       (timing_error_rdy),
    .time_tick (time_tick),
    .curr_tick (curr_tick),
    .fire      (tick_fire)
  );

  // a new sample starts with the first word read while SAMPLE is low
  assign tick_clear   = (state == ST_READ) && rd_wait && !sample;
  assign tick_advance = ((state == ST_TICK) || (state == ST_END_S && !end_wait))
                        && (curr_tick < target_tick);

  // --------------------------------------------------------- output capture
  logic             cap_done;
  logic             epoch_close;

  aer_output_capture #(.ACC_W(ACC_W)) u_cap (
    .clk         (clk),
    .rst_n       (rst_n),
    .enable      (state == ST_END_S && end_wait),
    .label       (label_q),
    .epoch_close (epoch_close),
    .out_data    (out_data),
    .out_req     (out_req),
    .out_ack     (out_ack),
    .done        (cap_done),
    .correct     (),
    .result      (),
    .acc_cnt     (),
    .epoch_acc   (epoch_acc)
  );

  wire sample_last_of_epoch = (cnt_sample_epoch + 1'b1) >= prm.n_samples;
  wire sample_last_of_batch = (cnt_sample_batch + 1'b1) >= prm.batch_size;
  wire epoch_complete       = cnt_sample_epoch >= prm.n_samples;

  assign epoch_close = (state == ST_END_B) && epoch_complete;

  // ------------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state            <= ST_IDLE;
      rd_wait          <= 1'b0;
      hs_ack_seen      <= 1'b0;
      end_wait         <= 1'b0;
      target_tick      <= '0;
      label_q          <= '0;
      cnt_sample_batch <= '0;
      cnt_sample_epoch <= '0;
      cnt_epochs       <= '0;
      mem_addr         <= '0;
      aerin_addr       <= '0;
      aerin_req        <= 1'b0;
      aerin_tar_en     <= 1'b0;
      sample           <= 1'b0;
      new_epoch_q      <= 1'b0;
      new_batch_q      <= 1'b0;
    end else begin
      new_epoch_q <= new_epoch;
      new_batch_q <= new_batch;

      unique case (state)
        ST_IDLE: begin
          if (new_epoch_rise) begin
            state            <= ST_READ;
            mem_addr         <= '0;
            rd_wait          <= 1'b0;
            cnt_sample_batch <= '0;
            cnt_sample_epoch <= '0;
            cnt_epochs       <= '0;
          end
        end

        ST_READ: begin
          if (!rd_wait) begin
            rd_wait <= 1'b1;               // mem_en is high this clock
          end else begin
            rd_wait  <= 1'b0;
            mem_addr <= mem_addr + 1'b1;
            if (!sample) sample <= 1'b1;   // first word of a sample
            case (word.code)
              EV_SPIKE: begin
                state       <= ST_TICK;
                target_tick <= word.tick;
                aerin_addr  <= word.field[AER_W-1:0];
              end
              EV_LABEL: begin
                state        <= ST_LABEL;
                label_q      <= word.field[AER_W-1:0];
                aerin_addr   <= word.field[AER_W-1:0];
                aerin_tar_en <= 1'b1;
                aerin_req    <= 1'b1;
                hs_ack_seen  <= 1'b0;
              end
              EV_END: begin
                state       <= ST_END_S;
                target_tick <= word.tick;
                end_wait    <= 1'b0;
              end
              default: ;                   // unknown code: skip the word
            endcase
          end
        end

        ST_TICK: begin
          if (curr_tick >= target_tick && !tick_fire) begin
            state       <= ST_SPIKE;
            aerin_req   <= 1'b1;
            hs_ack_seen <= 1'b0;
          end
        end

        ST_SPIKE, ST_LABEL: begin
          if (!hs_ack_seen) begin
            if (aerin_ack) begin
              aerin_req   <= 1'b0;
              hs_ack_seen <= 1'b1;
            end
          end else if (!aerin_ack) begin
            state        <= ST_READ;
            aerin_tar_en <= 1'b0;
            rd_wait      <= 1'b0;
          end
        end

        ST_END_S: begin
          if (!end_wait) begin
            if (curr_tick >= target_tick && !tick_fire) begin
              end_wait <= 1'b1;
              sample   <= 1'b0;            // ReckOn now reports its inference
            end
          end else if (cap_done) begin
            end_wait         <= 1'b0;
            cnt_sample_batch <= cnt_sample_batch + 1'b1;
            cnt_sample_epoch <= cnt_sample_epoch + 1'b1;
            rd_wait          <= 1'b0;
            if (sample_last_of_batch || sample_last_of_epoch) state <= ST_END_B;
            else                                               state <= ST_READ;
          end
        end

        ST_END_B: begin
          if (epoch_complete) begin
            state            <= ST_END_E;
            cnt_epochs       <= cnt_epochs + 1'b1;
            cnt_sample_epoch <= '0;
            cnt_sample_batch <= '0;
          end else if (new_batch_rise) begin
            state            <= ST_READ;
            mem_addr         <= '0;
            rd_wait          <= 1'b0;
            cnt_sample_batch <= '0;
          end
        end

        ST_END_E: begin
          if (cnt_epochs >= prm.n_epochs && stop) begin
            state      <= ST_IDLE;
            cnt_epochs <= '0;
          end else if (new_epoch_rise) begin
            state    <= ST_READ;
            mem_addr <= '0;
            rd_wait  <= 1'b0;
          end
        end

        default: state <= ST_IDLE;
      endcase
    end
  end

  assign mem_en       = (state == ST_READ) && !rd_wait;
  assign batch_done   = (state == ST_END_B);
  assign epoch_done   = (state == ST_END_E);
  assign infer_acc    = sample && (curr_tick >= prm.label_delay);
  assign target_valid = infer_acc && !test;
  assign state_o      = state;
  assign cnt_epochs_o = cnt_epochs;

  // ------------------------------------------------------------ assertions
  // 4-phase AER handshake: address and target flag stay put while REQ is up
  a_aer_stable: assert property (@(posedge clk) disable iff (!rst_n)
    aerin_req && !aerin_ack |=> $stable(aerin_addr) && $stable(aerin_tar_en));
  // a new request is only raised once the previous ACK has been released
  a_aer_rtz: assert property (@(posedge clk) disable iff (!rst_n)
    $rose(aerin_req) |-> !aerin_ack);
  // no time tick while a spike or label transfer is in flight
  a_no_tick_in_hs: assert property (@(posedge clk) disable iff (!rst_n)
    time_tick |-> !aerin_req);

endmodule
