// tb_workloads -- the experiments run on the SoC, replayed at their data
// sizes through the default-size design, with ReckOn replaced by
// reckon_model (so the accuracies are the model's, not the network's).
// Three independent copies of the SoC run side by side:
//   cue  : binary decision navigation (cue accumulation) - 40 input
//          neurons, 2 classes, 50-sample training and validation sets,
//          validation after every training epoch, about 420 event words per
//          sample, so a 50-sample epoch needs two batches of 25 in the
//          16384-word buffer; 10 training epochs as in the experiment.
//          Label delay 500 ticks (delayed supervision).
//   br3  : Braille digits, 3 classes - 12 input neurons, 980 training,
//          280 validation and 140 test samples, validation every 5 epochs,
//          batches of 245 samples. 5 of the 200 training epochs are run.
//   br4  : Braille digits, 4 classes - same sizes with 4 classes; the two
//          4-class subsets differ only in which digits they hold.
// The spike counts per sample of the Braille recordings and their tick
// spacing are this testbench's choice (10 to 40 spikes per sample).
module tb_workloads;
  logic done_cue, done_br3, done_br4;
  int   chk_cue, chk_br3, chk_br4, fail_cue, fail_br3, fail_br4;

  soc_harness #(
    .NAME("cue"), .NS_TRAIN(50), .NS_VAL(50), .VAL_EVERY(1), .NS_TEST(50), .B(25),
    .N_TRAIN_EP(10), .N_IN(40), .N_CLASS(2), .MIN_SP(380), .MAX_SP(460),
    .TIMING(2), .LABEL_DELAY(500), .AVG_SP_DT(3), .VERBOSE(0)
  ) cue (.done(done_cue), .checks(chk_cue), .failures(fail_cue));

  soc_harness #(
    .NAME("braille3"), .NS_TRAIN(980), .NS_VAL(280), .VAL_EVERY(5), .NS_TEST(140), .B(245),
    .N_TRAIN_EP(5), .N_IN(12), .N_CLASS(3), .MIN_SP(10), .MAX_SP(40),
    .TIMING(2), .LABEL_DELAY(2), .AVG_SP_DT(2), .VERBOSE(1)
  ) br3 (.done(done_br3), .checks(chk_br3), .failures(fail_br3));

  soc_harness #(
    .NAME("braille4"), .NS_TRAIN(980), .NS_VAL(280), .VAL_EVERY(5), .NS_TEST(140), .B(245),
    .N_TRAIN_EP(5), .N_IN(12), .N_CLASS(4), .MIN_SP(10), .MAX_SP(40),
    .TIMING(3), .LABEL_DELAY(4), .AVG_SP_DT(2), .VERBOSE(1)
  ) br4 (.done(done_br4), .checks(chk_br4), .failures(fail_br4));

  initial begin
    int checks, failures;
    fork
      wait (done_cue && done_br3 && done_br4);
      begin
        #2s;
        $display("FAIL: watchdog");
      end
    join_any
    checks   = chk_cue + chk_br3 + chk_br4;
    failures = fail_cue + fail_br3 + fail_br4 + ((done_cue && done_br3 && done_br4) ? 0 : 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
