// tb_aer_output_capture -- self-checking testbench of the output capture.
//
// A ReckOn-like source drives OUT_DATA/OUT_REQ with random delays; the
// testbench checks the 4-phase protocol (OUT_ACK rises only while enabled
// and after OUT_REQ, falls only after OUT_REQ has fallen, one clock after
// each), that `done` pulses once per result, that the latched result is the
// data sent, and that EPOCH_ACC, sampled at each epoch close, equals the
// number of results that matched their labels, counted by the testbench.
module tb_aer_output_capture;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic        enable = 0, epoch_close = 0, out_req = 0, out_ack, done, correct;
  logic [7:0]  label = 0, out_data = 0, result;
  logic [15:0] acc_cnt, epoch_acc;

  aer_output_capture dut (.*);

  int unsigned n_done = 0;
  always @(posedge clk) if (rst_n && done) n_done++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ep = 0; ep < 4; ep++) begin
      int unsigned exp_acc, nsamp;
      exp_acc = 0;
      nsamp = $urandom_range(12, 3);
      for (int s = 0; s < nsamp; s++) begin
        int unsigned d0;
        @(negedge clk);
        label = 8'($urandom_range(3));
        // result is right about half of the time
        out_data = ($urandom_range(1) == 1) ? label : 8'($urandom_range(3));
        if (out_data == label) exp_acc++;
        out_req = 1;
        // not enabled yet: no acknowledge
        repeat (3) @(negedge clk);
        check(!out_ack, "no OUT_ACK while disabled");
        enable = 1;
        @(negedge clk);
        check(out_ack, "OUT_ACK one clock after OUT_REQ seen while enabled");
        check(result == out_data, "result latched");
        d0 = $urandom_range(3);
        repeat (d0) begin
          @(negedge clk);
          check(out_ack, "OUT_ACK held while OUT_REQ is high");
        end
        out_req = 0;
        out_data = 8'hFF;                   // data may change once REQ is low
        #1;
        check(done, "done while OUT_REQ low and OUT_ACK high");
        check(correct == (result == label), "correct flag");
        @(negedge clk);
        check(!out_ack, "OUT_ACK released after OUT_REQ fell");
        enable = 0;
      end
      @(negedge clk);
      check(acc_cnt == 16'(exp_acc), $sformatf("running count %0d, expected %0d", acc_cnt, exp_acc));
      epoch_close = 1;
      @(negedge clk);
      epoch_close = 0;
      check(epoch_acc == 16'(exp_acc), $sformatf("epoch %0d EPOCH_ACC %0d, expected %0d", ep, epoch_acc, exp_acc));
      check(acc_cnt == 0, "running count cleared at epoch close");
    end
    check(n_done > 0, "results received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
