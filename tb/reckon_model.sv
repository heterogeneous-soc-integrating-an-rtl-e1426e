// reckon_model -- behavioural model of the ReckOn core's AER-side ports, for
// simulation only (not synthesizable logic, not the accelerator itself).
//
// It answers the 4-phase AER input handshake after a few clocks, counts the
// spikes each input address receives during a sample, records the label
// sent with AERIN_TAR_EN, and after every TIME_TICK holds TIMING_ERROR_RDY
// low for BUSY clocks as if it were updating its neurons. When SAMPLE falls
// it reports an "inference" on OUT_DATA with a 4-phase handshake: the input
// address that received the most spikes in the sample (lowest on a tie),
// modulo N_OUT. It also logs, for the testbench, the tick at which each spike
// arrived and whether SAMPLE was high, and the levels of TARGET_VALID and
// INFER_ACC at each tick.
module reckon_model #(
  parameter int unsigned BUSY    = 3,
  parameter int unsigned N_OUT   = 4,
  parameter int unsigned ACK_DLY = 2,
  parameter int unsigned LOG_N   = 4096
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] aerin_addr,
  input  logic       aerin_req,
  output logic       aerin_ack,
  input  logic       aerin_tar_en,
  input  logic       sample,
  input  logic       target_valid,
  input  logic       infer_acc,
  input  logic       time_tick,
  output logic       timing_error_rdy,
  output logic [7:0] out_data,
  output logic       out_req,
  input  logic       out_ack
);

  int unsigned spk_cnt [256];
  int unsigned tick_now;
  int unsigned busy_cnt;
  int unsigned n_spikes, n_labels, n_ticks, n_results, n_busy_stalls;
  int unsigned n_ticks_tv, n_ticks_ia, n_ticks_sample;
  int unsigned last_label;
  // spike log
  int unsigned log_addr [LOG_N];
  int unsigned log_tick [LOG_N];
  bit          log_in_sample [LOG_N];

  initial begin
    aerin_ack = 0; out_req = 0; out_data = 0; timing_error_rdy = 1;
    tick_now = 0; busy_cnt = 0;
    n_spikes = 0; n_labels = 0; n_ticks = 0; n_results = 0; n_busy_stalls = 0;
    n_ticks_tv = 0; n_ticks_ia = 0; n_ticks_sample = 0; last_label = 0;
    foreach (spk_cnt[i]) spk_cnt[i] = 0;
  end

  // AER input: 4-phase slave
  always begin
    do @(posedge clk); while (!(aerin_req && rst_n));
    repeat (ACK_DLY) @(posedge clk);
    if (aerin_tar_en) begin
      last_label = aerin_addr;
      n_labels++;
    end else begin
      if (n_spikes < LOG_N) begin
        log_addr[n_spikes] = aerin_addr;
        log_tick[n_spikes] = tick_now;
        log_in_sample[n_spikes] = sample;
      end
      spk_cnt[aerin_addr]++;
      n_spikes++;
    end
    aerin_ack <= 1'b1;
    do @(posedge clk); while (!(!aerin_req));
    aerin_ack <= 1'b0;
  end

  // time ticks and the readiness flag
  always @(posedge clk) begin
    if (time_tick && rst_n) begin
      tick_now++;
      n_ticks++;
      if (target_valid) n_ticks_tv++;
      if (infer_acc)    n_ticks_ia++;
      if (sample)       n_ticks_sample++;
      busy_cnt <= BUSY;
      timing_error_rdy <= 1'b0;
    end else if (busy_cnt > 1) begin
      busy_cnt <= busy_cnt - 1;
      if (!timing_error_rdy) n_busy_stalls++;
    end else begin
      busy_cnt <= 0;
      timing_error_rdy <= 1'b1;
    end
  end

  // inference at the end of each sample
  always begin
    do @(posedge clk); while (!(sample && rst_n));
    do @(posedge clk); while (!(!sample));
    begin
      int unsigned best, best_cnt;
      best = 0; best_cnt = 0;
      for (int i = 0; i < 256; i++)
        if (spk_cnt[i] > best_cnt) begin best = i; best_cnt = spk_cnt[i]; end
      foreach (spk_cnt[i]) spk_cnt[i] = 0;
      tick_now = 0;
      repeat (3) @(posedge clk);
      out_data <= 8'(best % N_OUT);
      out_req  <= 1'b1;
      do @(posedge clk); while (!(out_ack));
      repeat (2) @(posedge clk);
      out_req  <= 1'b0;
      n_results++;
      do @(posedge clk); while (!(!out_ack));
    end
  end

endmodule
