// tb_aer_decoder -- self-checking testbench of the AER decoder FSM.
//
// The testbench plays the ARM controller and the buffer memory; ReckOn is the
// behavioural reckon_model. Each epoch is a fresh random dataset of NS
// samples (a label word, a few spike words with rising target ticks, one
// word with an unknown code that must be skipped, an end-of-sample word),
// loaded B samples at a time. Epoch 1 is training (TEST low, tick timing 2,
// label delay 0); epoch 2 is a test set (TEST high, tick timing 6, label
// delay 3). Checked against values the testbench works out from the data:
//   - every spike reaches ReckOn in order, with its address, at its target
//     tick and while SAMPLE is high;
//   - the label of every sample arrives with AERIN_TAR_EN;
//   - the number of TIME_TICKs equals the sum of the samples' last ticks,
//     and ticks are never closer than max(SPI_TIMING, 2) clocks;
//   - TARGET_VALID / INFER_ACC are high on exactly the ticks at or after the
//     label delay, TARGET_VALID never on test data;
//   - BATCH_DONE comes after every full or final batch, EPOCH_DONE after each
//     epoch, and EPOCH_ACC equals the number of samples whose model result
//     matched their label;
//   - after the last epoch, STOP brings the FSM back to IDLE.
module tb_aer_decoder;
  import reckon_soc_pkg::*;

  localparam int unsigned ADDR_W = 8;
  localparam int unsigned NS     = 7;      // samples per epoch
  localparam int unsigned B      = 3;      // samples per batch
  localparam int unsigned NE     = 2;      // epochs
  localparam int unsigned N_OUT  = 4;
  localparam int unsigned MAXW   = 16;     // words per sample, at most

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------- DUT
  logic              mem_en;
  logic [ADDR_W-1:0] mem_addr;
  logic [31:0]       mem_rdata;
  logic              new_epoch = 0, new_batch = 0, test = 0, stop = 0;
  logic              epoch_done, batch_done;
  spi_params_t       prm;
  logic [7:0]        aerin_addr, out_data;
  logic              aerin_req, aerin_ack, aerin_tar_en;
  logic              sample, target_valid, infer_acc, time_tick, timing_error_rdy;
  logic              out_req, out_ack;
  logic [15:0]       epoch_acc;
  dec_state_e        state;
  logic [15:0]       cnt_epochs;

  aer_decoder #(.ADDR_W(ADDR_W)) dut (
    .clk, .rst_n, .mem_en, .mem_addr, .mem_rdata,
    .new_epoch, .new_batch, .test, .stop, .epoch_done, .batch_done, .prm,
    .aerin_addr, .aerin_req, .aerin_ack, .aerin_tar_en,
    .sample, .target_valid, .infer_acc, .time_tick, .timing_error_rdy,
    .out_data, .out_req, .out_ack, .epoch_acc,
    .state_o(state), .cnt_epochs_o(cnt_epochs)
  );

  reckon_model #(.N_OUT(N_OUT)) model (
    .clk, .rst_n, .aerin_addr, .aerin_req, .aerin_ack, .aerin_tar_en,
    .sample, .target_valid, .infer_acc, .time_tick, .timing_error_rdy,
    .out_data, .out_req, .out_ack
  );

  // buffer memory: one clock read latency
  logic [31:0] mem [2**ADDR_W];
  always_ff @(posedge clk) if (mem_en) mem_rdata <= mem[mem_addr];

  // ------------------------------------------------------ dataset and model
  logic [31:0] dwords [NS][MAXW];
  int unsigned dlen   [NS];
  int unsigned exp_addr [$], exp_tick [$];
  int unsigned exp_ticks_total = 0, exp_tv = 0, exp_ia = 0, exp_labels = 0;
  int unsigned exp_acc;

  function automatic logic [31:0] ev(input logic [7:0] code, input int unsigned f, input int unsigned t);
    return {code, 12'(f), 12'(t)};
  endfunction

  task automatic gen_epoch(input bit is_test, input int unsigned ldelay);
    exp_acc = 0;
    for (int s = 0; s < NS; s++) begin
      int unsigned n, t, nsp, lbl, cnt [16], best, best_cnt, fin, first;
      n = 0; t = 0;
      foreach (cnt[i]) cnt[i] = 0;
      lbl = $urandom_range(N_OUT - 1);
      dwords[s][n++] = ev(8'h02, lbl, 0);
      exp_labels++;
      nsp = $urandom_range(8, 3);
      for (int k = 0; k < nsp; k++) begin
        int unsigned a;
        // bias towards the label so that some samples are right
        a = ($urandom_range(2) == 0) ? lbl : $urandom_range(15);
        t += $urandom_range(3);
        dwords[s][n++] = ev(8'h03, a, t);
        exp_addr.push_back(a);
        exp_tick.push_back(t);
        cnt[a]++;
        if (k == 1) dwords[s][n++] = ev(8'h00, 12'hABC, t);   // unknown code
      end
      fin = t + $urandom_range(3, 1);
      dwords[s][n++] = ev(8'h01, 0, fin);
      dlen[s] = n;
      exp_ticks_total += fin;
      first = (ldelay > 1) ? ldelay : 1;
      if (fin >= first) begin
        exp_ia += fin - first + 1;
        if (!is_test) exp_tv += fin - first + 1;
      end
      best = 0; best_cnt = 0;
      for (int i = 0; i < 16; i++) if (cnt[i] > best_cnt) begin best = i; best_cnt = cnt[i]; end
      if ((best % N_OUT) == lbl) exp_acc++;
    end
  endtask

  task automatic load_batch(input int unsigned first, input int unsigned n);
    int unsigned w = 0;
    for (int s = first; s < first + n; s++)
      for (int k = 0; k < dlen[s]; k++) mem[w++] = dwords[s][k];
    for (int i = w; i < 2**ADDR_W; i++) mem[i] = 32'hDEAD_0000;   // garbage past the batch
  endtask

  task automatic pulse(ref logic sig);
    #1 sig = 1;
    repeat (2) @(posedge clk);
    #1 sig = 0;
  endtask

  // ------------------------------------------------------------ monitors
  int unsigned last_tick_cyc = 0, cyc = 0, gap_viol = 0;
  int unsigned n_batch_done = 0, n_epoch_done = 0, n_stalls = 0;
  logic        batch_done_q = 0, epoch_done_q = 0;
  always @(posedge clk) begin
    cyc++;
    if (time_tick) begin
      int unsigned g;
      g = (prm.timing > 2) ? prm.timing : 2;
      if (last_tick_cyc != 0 && sample && (cyc - last_tick_cyc) < g) gap_viol++;
      last_tick_cyc = cyc;
    end
    if (dut.u_tick.advance && !timing_error_rdy) n_stalls++;
    if (batch_done && !batch_done_q) n_batch_done++;
    if (epoch_done && !epoch_done_q) n_epoch_done++;
    batch_done_q <= batch_done;
    epoch_done_q <= epoch_done;
    if (sample && (state == ST_READ)) check(!test || !target_valid, "TARGET_VALID high on test data");
  end

  // -------------------------------------------------------------- watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog, state %s", state.name());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ main
  initial begin
    prm = '{n_epochs: 16'(NE), n_samples: 16'(NS), batch_size: 16'(B), timing: 16'd2, label_delay: 12'd0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    check(state == ST_IDLE, "IDLE after reset");

    for (int ep = 0; ep < NE; ep++) begin
      int unsigned s, nb_before;
      bit is_test;
      is_test   = (ep == NE - 1);
      nb_before = n_batch_done;
      test = is_test;
      if (is_test) begin
        prm.timing = 16'd6;
        prm.label_delay = 12'd3;
      end
      gen_epoch(is_test, prm.label_delay);
      load_batch(0, (B < NS) ? B : NS);
      pulse(new_epoch);
      s = B;
      while (s < NS) begin
        do @(posedge clk); while (!(batch_done));
        check(!epoch_done, "no EPOCH_DONE in mid-epoch END_B");
        repeat (5) @(posedge clk);
        check(state == ST_END_B, "END_B waits for NEW_BATCH");
        load_batch(s, (NS - s < B) ? NS - s : B);
        pulse(new_batch);
        s += B;
      end
      do @(posedge clk); while (!(epoch_done));
      repeat (2) @(posedge clk);
      check(epoch_acc == 16'(exp_acc), $sformatf("epoch %0d EPOCH_ACC %0d, expected %0d", ep, epoch_acc, exp_acc));
      check(n_batch_done - nb_before == (NS + B - 1) / B,
            $sformatf("epoch %0d: %0d BATCH_DONE, expected %0d", ep, n_batch_done - nb_before, (NS + B - 1) / B));
      check(cnt_epochs == 16'(ep + 1), "epoch counter");
      check(state == ST_END_E, "END_E holds until NEW_EPOCH or STOP");
    end

    stop = 1;
    repeat (4) @(posedge clk);
    check(state == ST_IDLE, "STOP after the last epoch returns to IDLE");
    stop = 0;

    // spikes: order, address, tick, inside SAMPLE
    check(model.n_spikes == exp_addr.size(),
          $sformatf("%0d spikes received, expected %0d", model.n_spikes, exp_addr.size()));
    for (int i = 0; i < exp_addr.size() && i < int'(model.n_spikes); i++) begin
      check(model.log_addr[i] == exp_addr[i] && model.log_tick[i] == exp_tick[i] && model.log_in_sample[i],
            $sformatf("spike %0d: addr %0d tick %0d (expected %0d @ %0d)", i,
                      model.log_addr[i], model.log_tick[i], exp_addr[i], exp_tick[i]));
    end
    check(model.n_labels == exp_labels, $sformatf("%0d labels, expected %0d", model.n_labels, exp_labels));
    check(model.n_results == NE * NS, $sformatf("%0d inference results, expected %0d", model.n_results, NE * NS));
    check(model.n_ticks == exp_ticks_total, $sformatf("%0d ticks, expected %0d", model.n_ticks, exp_ticks_total));
    check(model.n_ticks_tv == exp_tv, $sformatf("%0d ticks with TARGET_VALID, expected %0d", model.n_ticks_tv, exp_tv));
    check(model.n_ticks_ia == exp_ia, $sformatf("%0d ticks with INFER_ACC, expected %0d", model.n_ticks_ia, exp_ia));
    check(gap_viol == 0, $sformatf("%0d ticks closer than SPI_TIMING", gap_viol));
    check(n_epoch_done == NE, "one EPOCH_DONE per epoch");
    check(n_stalls > 0, "ticks were held back by TIMING_ERROR_RDY");

    $display("spikes=%0d ticks=%0d batches=%0d epochs=%0d stalls=%0d",
             model.n_spikes, model.n_ticks, n_batch_done, n_epoch_done, n_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
