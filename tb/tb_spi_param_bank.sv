// tb_spi_param_bank -- self-checking testbench of the SPI parameter-bank
// extension.
//
// An SPI master (mode 0, SCK = clk/8) sends 32-bit frames. Checked: the
// reset values; that writes land in the right register (label delay keeps
// only 12 bits) and show on the `prm` outputs; that reads return the
// register on MISO during the 16 data bits with `miso_oe` high then and
// only then; that frames to addresses outside the bank, and frames with
// other commands, change nothing and never drive MISO.
module tb_spi_param_bank;
  import reckon_soc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic        sck = 0, mosi = 0, miso, miso_oe;
  spi_params_t prm;

  spi_param_bank dut (.*);

  int unsigned oe_cycles;
  always @(posedge clk) if (miso_oe) oe_cycles++;

  task automatic spi_xfer(input logic [31:0] tx, output logic [31:0] rx, output int unsigned oe_bits);
    oe_bits = 0;
    for (int i = 31; i >= 0; i--) begin
      mosi = tx[i];
      repeat (4) @(negedge clk);
      rx[i] = miso;                 // master samples on the rising edge
      if (miso_oe) oe_bits++;
      sck = 1;
      repeat (4) @(negedge clk);
      sck = 0;
    end
    repeat (6) @(negedge clk);
  endtask

  function automatic logic [31:0] frame(input logic [1:0] cmd, input logic [13:0] a, input logic [15:0] d);
    return {cmd, a, d};
  endfunction

  function automatic logic [15:0] reg_of(input int unsigned a, input spi_params_t p);
    case (a)
      0: return p.n_epochs;
      1: return p.n_samples;
      2: return p.batch_size;
      3: return p.timing;
      default: return 16'(p.label_delay);
    endcase
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rx;
    int unsigned oe;
    logic [15:0] shadow [5];
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(prm.n_epochs == 16'd10 && prm.n_samples == 16'd50 && prm.batch_size == 16'd50
          && prm.timing == 16'd2 && prm.label_delay == 12'd0, "reset values");
    for (int a = 0; a < 5; a++) shadow[a] = reg_of(a, prm);

    for (int n = 0; n < 30; n++) begin
      int unsigned a;
      logic [15:0] d;
      a = $urandom_range(6);                  // 5 and 6 are outside the bank
      d = 16'($urandom);
      spi_xfer(frame(SPI_CMD_WRITE, 14'(a), d), rx, oe);
      check(oe == 0, "no MISO drive during a write");
      if (a < 5) shadow[a] = (a == 4) ? {4'h0, d[11:0]} : d;
      for (int k = 0; k < 5; k++)
        check(reg_of(k, prm) == shadow[k], $sformatf("after write %0d: reg %0d = %h, expected %h", a, k, reg_of(k, prm), shadow[k]));
      // read it back
      spi_xfer(frame(SPI_CMD_READ, 14'(a), 16'h0), rx, oe);
      if (a < 5) begin
        check(rx[15:0] == shadow[a], $sformatf("read %0d: %h, expected %h", a, rx[15:0], shadow[a]));
        check(oe == 16, $sformatf("MISO driven for %0d bits, expected 16", oe));
      end else begin
        check(oe == 0, "no MISO drive for an address outside the bank");
      end
    end

    // other commands are ignored
    spi_xfer(frame(2'b11, 14'd0, 16'h1234), rx, oe);
    spi_xfer(frame(2'b00, 14'd1, 16'h1234), rx, oe);
    for (int k = 0; k < 5; k++) check(reg_of(k, prm) == shadow[k], "ignored commands change nothing");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
