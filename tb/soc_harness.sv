// soc_harness -- end-to-end test of reckon_soc_pl at its default size.
//
// The harness plays the ARM processing system and its AXI bridges, and
// reckon_model plays the ReckOn core:
//   - configuration: SPI frames (as the AXI Quad SPI bridge would send)
//     write the decoder's run-time parameters, which are read back on MISO;
//     between the training epochs and the final test epoch the number of
//     samples is rewritten, as the controller does at run time;
//   - data: each epoch is a random dataset of event words; batches of B
//     samples are written through the BRAM port (AXI BRAM controller) and
//     released with NEW_BATCH / NEW_EPOCH on the GPIO lines, answering
//     BATCH_DONE / EPOCH_DONE;
//   - end: after N_TRAIN_EP training epochs and one test epoch, STOP returns
//     the decoder to IDLE.
// Every spike is checked as it arrives (address, tick, SAMPLE high), and at
// the end of each epoch EPOCH_ACC is compared with the count the harness
// works out from the data with the model's rule (most-stimulated input,
// modulo N_CLASS). Each mechanism of the design is counted and must occur
// at least once: ticks, spikes, labels, readiness stalls, batch waits, epoch
// ends, test-set epochs, label-delay gating, skipped words, SPI read-back,
// SPI pass-through to ReckOn, STOP. `done` rises when the run is over;
// `checks` and `failures` count the comparisons made and those that failed.
module soc_harness #(
  parameter int unsigned NS_TRAIN    = 5,    // samples per training epoch
  parameter string       NAME        = "soc",
  parameter int unsigned NS_VAL      = 0,    // samples per validation epoch
  parameter int unsigned VAL_EVERY   = 0,    // a validation epoch after every VAL_EVERY training epochs (0: none)
  parameter int unsigned NS_TEST     = 3,    // samples in the final test epoch
  parameter int unsigned B           = 2,    // samples per batch
  parameter int unsigned N_TRAIN_EP  = 2,
  parameter int unsigned N_IN        = 16,   // input neurons (spike addresses)
  parameter int unsigned N_CLASS     = 4,
  parameter int unsigned MIN_SP      = 3,    // spikes per sample
  parameter int unsigned MAX_SP      = 8,
  parameter int unsigned TIMING      = 4,    // SPI_TIMING
  parameter int unsigned LABEL_DELAY = 2,    // SPI_LABEL_DELAY
  parameter int unsigned AVG_SP_DT   = 3,    // max. ticks between spikes
  parameter bit          VERBOSE     = 1
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import reckon_soc_pkg::*;

  localparam int unsigned NS_MAX0 = (NS_TRAIN > NS_TEST) ? NS_TRAIN : NS_TEST;
  localparam int unsigned NS_MAX  = (NS_MAX0 > NS_VAL) ? NS_MAX0 : NS_VAL;
  localparam int unsigned N_VAL_EP = (VAL_EVERY == 0) ? 0 : N_TRAIN_EP / VAL_EVERY;
  localparam int unsigned TOTAL_EP = N_TRAIN_EP + N_VAL_EP + 1;
  localparam int unsigned MAXW   = MAX_SP + 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin done = 0; checks = 0; failures = 0; end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------- DUT
  logic        bram_en = 0;
  logic [3:0]  bram_we = 0;
  logic [15:0] bram_addr = 0;
  logic [31:0] bram_wrdata = 0, bram_rddata;
  logic        gpio_new_epoch = 0, gpio_new_batch = 0, gpio_test = 0, gpio_stop = 0;
  logic        gpio_epoch_done, gpio_batch_done;
  logic        spi_sck = 0, spi_mosi = 0, spi_miso;
  logic        reckon_spi_sck, reckon_spi_mosi, reckon_spi_miso = 0;
  logic [7:0]  aerin_addr, out_data;
  logic        aerin_req, aerin_ack, aerin_tar_en;
  logic        sample, target_valid, infer_acc, time_tick, timing_error_rdy;
  logic        out_req, out_ack;
  logic [15:0] epoch_acc, cnt_epochs;
  dec_state_e  state;

  reckon_soc_pl dut (
    .clk, .rst_n,
    .bram_en, .bram_we, .bram_addr, .bram_wrdata, .bram_rddata,
    .gpio_new_epoch, .gpio_new_batch, .gpio_test, .gpio_stop,
    .gpio_epoch_done, .gpio_batch_done,
    .spi_sck, .spi_mosi, .spi_miso,
    .reckon_spi_sck, .reckon_spi_mosi, .reckon_spi_miso,
    .reckon_aerin_addr(aerin_addr), .reckon_aerin_req(aerin_req),
    .reckon_aerin_ack(aerin_ack), .reckon_aerin_tar_en(aerin_tar_en),
    .reckon_sample(sample), .reckon_target_valid(target_valid),
    .reckon_infer_acc(infer_acc), .reckon_time_tick(time_tick),
    .reckon_timing_error_rdy(timing_error_rdy),
    .reckon_out_data(out_data), .reckon_out_req(out_req), .reckon_out_ack(out_ack),
    .epoch_acc, .dbg_state(state), .dbg_cnt_epochs(cnt_epochs)
  );

  reckon_model #(.N_OUT(N_CLASS), .LOG_N(1)) model (
    .clk, .rst_n, .aerin_addr, .aerin_req, .aerin_ack, .aerin_tar_en,
    .sample, .target_valid, .infer_acc, .time_tick, .timing_error_rdy,
    .out_data, .out_req, .out_ack
  );

  // ------------------------------------------------------------ dataset
  logic [31:0] dwords [NS_MAX][MAXW];
  int unsigned dlen   [NS_MAX];
  int unsigned exp_addr [$], exp_tick [$];
  int unsigned exp_ticks_total = 0, exp_labels = 0, exp_acc, max_batch_words = 0;

  function automatic logic [31:0] ev(input logic [7:0] code, input int unsigned f, input int unsigned t);
    return {code, 12'(f), 12'(t)};
  endfunction

  task automatic gen_epoch(input int unsigned ns);
    exp_acc = 0;
    for (int s = 0; s < ns; s++) begin
      int unsigned n, t, nsp, lbl, best, best_cnt, fin;
      int unsigned cnt [256];
      n = 0; t = 0;
      foreach (cnt[i]) cnt[i] = 0;
      lbl = $urandom_range(N_CLASS - 1);
      dwords[s][n++] = ev(8'h02, lbl, 0);
      exp_labels++;
      nsp = $urandom_range(MAX_SP, MIN_SP);
      for (int k = 0; k < nsp; k++) begin
        int unsigned a;
        a = $urandom_range(N_IN - 1);
        if ($urandom_range(2) == 0) a = a - (a % N_CLASS) + lbl;   // favour the label's inputs
        if (a >= N_IN) a = lbl;
        t += $urandom_range(AVG_SP_DT);
        dwords[s][n++] = ev(8'h03, a, t);
        exp_addr.push_back(a);
        exp_tick.push_back(t);
        cnt[a]++;
        if (k == 0 && (s % 2) == 0) dwords[s][n++] = ev(8'h00, 0, 0);   // word to be skipped
      end
      fin = t + $urandom_range(3, 1);
      dwords[s][n++] = ev(8'h01, 0, fin);
      dlen[s] = n;
      exp_ticks_total += fin;
      best = 0; best_cnt = 0;
      for (int i = 0; i < 256; i++) if (cnt[i] > best_cnt) begin best = i; best_cnt = cnt[i]; end
      if ((best % N_CLASS) == lbl) exp_acc++;
    end
  endtask

  // AXI BRAM controller: byte-addressed word writes
  task automatic load_batch(input int unsigned first, input int unsigned n);
    int unsigned w;
    w = 0;
    for (int s = first; s < first + n; s++)
      for (int k = 0; k < dlen[s]; k++) begin
        @(negedge clk);
        bram_en = 1; bram_we = 4'hF; bram_addr = 16'(w * 4); bram_wrdata = dwords[s][k];
        w++;
      end
    @(negedge clk);
    bram_en = 0; bram_we = 0;
    if (w > max_batch_words) max_batch_words = w;
    // read the first word back through the same port
    @(negedge clk); bram_en = 1; bram_addr = 0;
    @(negedge clk); bram_en = 0;
    check(bram_rddata == dwords[first][0], "BRAM port read-back");
  endtask

  task automatic pulse(ref logic sig);
    @(negedge clk); sig = 1;
    repeat (2) @(negedge clk);
    sig = 0;
  endtask

  // ------------------------------------------------------------ SPI master
  int unsigned n_spi_reads = 0, n_passthru = 0, n_samples_run = 0;
  task automatic spi_xfer(input logic [31:0] tx, output logic [31:0] rx);
    for (int i = 31; i >= 0; i--) begin
      spi_mosi = tx[i];
      repeat (4) @(negedge clk);
      rx[i] = spi_miso;
      if (!dut.bank_miso_oe) begin
        check(spi_miso == reckon_spi_miso, "ReckOn MISO passed through while the bank is idle");
        n_passthru++;
      end
      check(reckon_spi_sck == spi_sck && reckon_spi_mosi == spi_mosi, "SPI passed on to ReckOn");
      spi_sck = 1;
      repeat (4) @(negedge clk);
      spi_sck = 0;
    end
    repeat (6) @(negedge clk);
  endtask

  task automatic spi_write(input logic [13:0] a, input logic [15:0] d);
    logic [31:0] rx;
    logic [31:0] back;
    spi_xfer({SPI_CMD_WRITE, a, d}, rx);
    spi_xfer({SPI_CMD_READ, a, 16'h0}, back);
    check(back[15:0] == d, $sformatf("SPI read-back of register %0d: %h, expected %h", a, back[15:0], d));
    n_spi_reads++;
  endtask

  // ------------------------------------------------------------ monitors
  int unsigned n_spikes = 0, n_ticks = 0, n_stalls = 0, n_batch_waits = 0, n_epoch_ends = 0;
  int unsigned n_gated_ticks = 0, n_skipped = 0, n_test_epochs = 0, n_stops = 0, n_tv_in_test = 0;
  int unsigned tick_gap_viol = 0, last_tick_cyc = 0, cyc = 0;
  logic        req_q = 0;
  dec_state_e  state_q = ST_IDLE;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    // spikes, checked in order as their request rises
    if (aerin_req && !req_q && !aerin_tar_en) begin
      if (exp_addr.size() == 0) check(0, "unexpected spike");
      else begin
        int unsigned ea, et;
        ea = exp_addr.pop_front();
        et = exp_tick.pop_front();
        check(aerin_addr == 8'(ea) && model.tick_now == et && sample,
              $sformatf("spike %0d: addr %0d tick %0d, expected %0d @ %0d", n_spikes, aerin_addr, model.tick_now, ea, et));
      end
      n_spikes++;
    end
    req_q <= aerin_req;
    if (time_tick) begin
      n_ticks++;
      if (sample && !infer_acc) n_gated_ticks++;
      if (gpio_test && target_valid) n_tv_in_test++;
      if (last_tick_cyc != 0 && sample && (cyc - last_tick_cyc) < TIMING) tick_gap_viol++;
      last_tick_cyc = cyc;
    end
    if (dut.u_dec.u_tick.advance && !timing_error_rdy) n_stalls++;
    if (state == ST_READ && dut.u_dec.rd_wait && dut.mem_rdata[31:24] == 8'h00) n_skipped++;
    if (state == ST_END_B && state_q != ST_END_B && !dut.u_dec.epoch_complete) n_batch_waits++;
    if (state == ST_END_E && state_q != ST_END_E) n_epoch_ends++;
    if (state == ST_IDLE && state_q == ST_END_E) n_stops++;
    state_q <= state;
  end

  // ReckOn's own SPI slave answers with a random MISO bit stream
  always @(negedge clk) reckon_spi_miso <= 1'($urandom_range(1));

  // ------------------------------------------------------------------ main
  initial begin
    int unsigned ns_prev, n_train_done, ep;
    bit val_due;
    val_due = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    check(state == ST_IDLE, "IDLE after reset");

    spi_write(PRM_ADDR_N_EPOCHS,    16'(TOTAL_EP));
    spi_write(PRM_ADDR_N_SAMPLES,   16'(NS_TRAIN));
    spi_write(PRM_ADDR_BATCH_SIZE,  16'(B));
    spi_write(PRM_ADDR_TIMING,      16'(TIMING));
    spi_write(PRM_ADDR_LABEL_DELAY, 16'(LABEL_DELAY));
    ns_prev = NS_TRAIN;
    n_train_done = 0;

    // schedule: training epochs, a validation epoch after every VAL_EVERY
    // of them, and a final test epoch
    for (ep = 0; ep < TOTAL_EP; ep++) begin
      int unsigned s, ns;
      bit is_test;
      string kind;
      if (ep == TOTAL_EP - 1) begin
        is_test = 1; ns = NS_TEST; kind = "test";
      end else if (val_due) begin
        is_test = 1; ns = NS_VAL; kind = "validation";
        val_due = 0;
      end else begin
        is_test = 0; ns = NS_TRAIN; kind = "train";
      end
      if (is_test) n_test_epochs++;
      else begin
        n_train_done++;
        val_due = (VAL_EVERY != 0) && (n_train_done % VAL_EVERY == 0);
      end
      if (ns != ns_prev) begin
        spi_write(PRM_ADDR_N_SAMPLES, 16'(ns));   // run-time reconfiguration
        ns_prev = ns;
      end
      gpio_test = is_test;
      gen_epoch(ns);
      load_batch(0, (B < ns) ? B : ns);
      pulse(gpio_new_epoch);
      s = B;
      while (s < ns) begin
        do @(posedge clk); while (!gpio_batch_done);
        repeat (4) @(negedge clk);
        check(gpio_batch_done && !gpio_epoch_done, "BATCH_DONE held until NEW_BATCH");
        load_batch(s, (ns - s < B) ? ns - s : B);
        pulse(gpio_new_batch);
        s += B;
      end
      do @(posedge clk); while (!gpio_epoch_done);
      repeat (2) @(negedge clk);
      check(epoch_acc == 16'(exp_acc), $sformatf("epoch %0d: EPOCH_ACC %0d, expected %0d of %0d", ep, epoch_acc, exp_acc, ns));
      check(cnt_epochs == 16'(ep + 1), "epoch counter");
      n_samples_run += ns;
      if (VERBOSE) $display("%s epoch %0d (%s): %0d/%0d correct", NAME, ep, kind, epoch_acc, ns);
    end

    gpio_stop = 1;
    repeat (4) @(negedge clk);
    check(state == ST_IDLE, "STOP after the last epoch returns to IDLE");
    gpio_stop = 0;

    check(exp_addr.size() == 0, $sformatf("%0d spikes never sent", exp_addr.size()));
    check(model.n_labels == exp_labels, "every label sent with AERIN_TAR_EN");
    check(model.n_results == n_samples_run, "one inference per sample");
    check(n_ticks == exp_ticks_total, $sformatf("%0d ticks, expected %0d", n_ticks, exp_ticks_total));
    check(tick_gap_viol == 0, "ticks never closer than SPI_TIMING");
    check(n_tv_in_test == 0, "no TARGET_VALID on the test set");
    check(max_batch_words <= 2 ** 14, "batches fit the buffer");

    check(n_spikes > 0,        "mechanism: spike");
    check(exp_labels > 0,      "mechanism: label");
    check(n_ticks > 0,         "mechanism: time tick");
    check(n_stalls > 0,        "mechanism: TIMING_ERROR_RDY stall");
    check(n_batch_waits > 0,   "mechanism: batch wait (END_B / NEW_BATCH)");
    check(n_epoch_ends > 0,    "mechanism: epoch end (END_E)");
    check(n_test_epochs > 0,   "mechanism: test-set epoch");
    check(n_gated_ticks > 0,   "mechanism: label-delay gating");
    check(n_skipped > 0,       "mechanism: skipped word");
    check(n_spi_reads > 0,     "mechanism: SPI read-back");
    check(n_passthru > 0,      "mechanism: SPI pass-through");
    check(n_stops > 0,         "mechanism: STOP to IDLE");
    $display("%s: samples=%0d spikes=%0d labels=%0d ticks=%0d stalls=%0d batch_waits=%0d epochs=%0d test_epochs=%0d gated_ticks=%0d skipped=%0d spi_reads=%0d stops=%0d max_batch_words=%0d cycles=%0d",
             NAME, n_samples_run, n_spikes, exp_labels, n_ticks, n_stalls, n_batch_waits, n_epoch_ends, n_test_epochs,
             n_gated_ticks, n_skipped, n_spi_reads, n_stops, max_batch_words, cyc);
    done = 1;
  end

endmodule
