// tb_buffer_bram -- self-checking testbench of the shared buffer memory.
//
// Random byte-masked writes through port A (byte addresses) are mirrored in
// a reference array; reads through port A and port B are compared with it,
// including the one-clock read latency and the read-first behaviour of port
// A when it writes and reads the same word. Port B reads run in the same
// clocks as port A writes, as when the decoder reads while the controller
// loads.
module tb_buffer_bram;

  localparam int unsigned ADDR_W = 6;
  localparam int unsigned DEPTH  = 2 ** ADDR_W;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic              a_en = 0, b_en = 0;
  logic [3:0]        a_we = 0;
  logic [ADDR_W+1:0] a_addr = 0;
  logic [31:0]       a_wdata = 0, a_rdata, b_rdata;
  logic [ADDR_W-1:0] b_addr = 0;

  buffer_bram #(.ADDR_W(ADDR_W)) dut (.*);

  logic [31:0] ref_mem [DEPTH];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every word through port A
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 4'hF; a_addr = (ADDR_W+2)'(i * 4); a_wdata = $urandom;
      ref_mem[i] = a_wdata;
    end
    @(negedge clk); a_en = 0; a_we = 0;

    // random traffic: A writes with byte masks, B reads at the same time
    for (int n = 0; n < 500; n++) begin
      int unsigned wa, ra;
      logic [31:0] old_a, exp_b;
      wa = $urandom_range(DEPTH - 1);
      ra = $urandom_range(DEPTH - 1);
      @(negedge clk);
      a_en = 1; a_we = 4'($urandom); a_addr = (ADDR_W+2)'(wa * 4 + $urandom_range(3)); a_wdata = $urandom;
      b_en = 1; b_addr = ADDR_W'(ra);
      old_a = ref_mem[wa];
      exp_b = ref_mem[ra];           // a read in the same clock as a write sees the old word
      for (int b = 0; b < 4; b++) if (a_we[b]) ref_mem[wa][8*b +: 8] = a_wdata[8*b +: 8];
      @(negedge clk);
      a_en = 0; b_en = 0;
      check(a_rdata == old_a, $sformatf("port A read-first at %0d: %h, expected %h", wa, a_rdata, old_a));
      check(b_rdata == exp_b, $sformatf("port B at %0d: %h, expected %h", ra, b_rdata, exp_b));
    end

    // read back every word on both ports
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 0; a_addr = (ADDR_W+2)'(i * 4);
      b_en = 1; b_addr = ADDR_W'(DEPTH - 1 - i);
      @(negedge clk);
      check(a_rdata == ref_mem[i], $sformatf("port A final %0d", i));
      check(b_rdata == ref_mem[DEPTH - 1 - i], $sformatf("port B final %0d", DEPTH - 1 - i));
    end

    // disabled port B holds its output
    @(negedge clk); b_en = 1; b_addr = 0; a_en = 0;
    @(negedge clk); b_en = 0; b_addr = 1;
    @(negedge clk);
    check(b_rdata == ref_mem[0], "port B holds its data while disabled");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
