// tb_reckon_soc_pl -- end-to-end test of the programmable-logic SoC at its
// default size (16384-word buffer, no parameter overridden): two training
// epochs of five samples and a test epoch of three, in batches of two
// samples, with a tick period of four clocks and a label delay of two ticks.
// See soc_harness for what is checked and which mechanisms must occur.
module tb_reckon_soc_pl;
  logic done;
  int   checks, failures;

  soc_harness #(
    .NS_TRAIN(5), .NS_TEST(3), .B(2), .N_TRAIN_EP(2),
    .N_IN(16), .N_CLASS(4), .MIN_SP(3), .MAX_SP(8),
    .TIMING(4), .LABEL_DELAY(2)
  ) h (.done, .checks, .failures);

  initial begin
    fork
      wait (done);
      begin
        #50ms;
        $display("FAIL: watchdog");
        failures++;
      end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
