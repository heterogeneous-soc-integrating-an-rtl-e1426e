// reckon_soc_pl -- programmable-logic side of the ARM-controlled ReckOn SoC:
// the hardware that sits between the Zynq processing system and the ReckOn
// recurrent-SNN accelerator.
//
// Structure. The ARM writes a batch of event words into the shared buffer
// (buffer_bram) through the AXI BRAM controller, then starts or resumes the
// AER decoder (aer_decoder) with NEW_EPOCH or NEW_BATCH on AXI GPIO lines.
// The decoder replays the batch into ReckOn as spikes, labels and time
// ticks, collects ReckOn's inference at the end of each sample and counts
// the correct ones (EPOCH_ACC, for the logic analyser). It raises
// BATCH_DONE when the buffer has been consumed and EPOCH_DONE when an epoch
// is over, and the ARM answers with the next batch or epoch. The decoder's
// run-time parameters live in an extension of ReckOn's SPI parameter bank
// (spi_param_bank), written by the AXI Quad SPI bridge on the same SPI bus
// that configures the rest of ReckOn.
//
// Interface. One clock (the PL fabric clock) and an active-low reset.
// bram_*  : native port of the AXI BRAM controller (byte address).
// gpio_*  : AXI GPIO lines.
// spi_*   : SPI bus from the AXI Quad SPI bridge; reckon_spi_* passes it on
//           to ReckOn's own SPI slave, whose MISO is merged with the bank's.
// reckon_*: the ReckOn core's AER input channel, control lines and output
//           channel. ReckOn itself is not part of this RTL; these ports
//           connect to it.
// epoch_acc: count of correct inferences of the last epoch.
//
// What follows the design: the blocks, their connections and the signal
// names. The MISO merge and the byte-address port are this design's choices.
// reckon_spi_sck and reckon_spi_mosi are plain copies of the incoming SPI
// lines: the bus is shared with ReckOn's own SPI slave, which is outside
// this module.
module reckon_soc_pl
  import reckon_soc_pkg::*;
#(
  parameter int unsigned ADDR_W = 14,   // buffer depth 2**ADDR_W words
  parameter int unsigned ACC_W  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI BRAM controller
  input  logic              bram_en,
  input  logic [3:0]        bram_we,
  input  logic [ADDR_W+1:0] bram_addr,
  input  logic [WORD_W-1:0] bram_wrdata,
  output logic [WORD_W-1:0] bram_rddata,
  // AXI GPIO
  input  logic              gpio_new_epoch,
  input  logic              gpio_new_batch,
  input  logic              gpio_test,
  input  logic              gpio_stop,
  output logic              gpio_epoch_done,
  output logic              gpio_batch_done,
  // SPI from the AXI Quad SPI bridge
  input  logic              spi_sck,
  input  logic              spi_mosi,
  output logic              spi_miso,
  // SPI on to ReckOn's own SPI slave
  output logic              reckon_spi_sck,
  output logic              reckon_spi_mosi,
  input  logic              reckon_spi_miso,
  // ReckOn AER input channel
  output logic [AER_W-1:0]  reckon_aerin_addr,
  output logic              reckon_aerin_req,
  input  logic              reckon_aerin_ack,
  output logic              reckon_aerin_tar_en,
  // ReckOn control
  output logic              reckon_sample,
  output logic              reckon_target_valid,
  output logic              reckon_infer_acc,
  output logic              reckon_time_tick,
  input  logic              reckon_timing_error_rdy,
  // ReckOn output channel
  input  logic [AER_W-1:0]  reckon_out_data,
  input  logic              reckon_out_req,
  output logic              reckon_out_ack,
  // logic analyser
  output logic [ACC_W-1:0]  epoch_acc,
  output dec_state_e        dbg_state,
  output logic [PRM_W-1:0]  dbg_cnt_epochs
);

  logic              mem_en;
  logic [ADDR_W-1:0] mem_addr;
  logic [WORD_W-1:0] mem_rdata;
  spi_params_t       prm;
  logic              bank_miso, bank_miso_oe;

  buffer_bram #(.ADDR_W(ADDR_W), .DATA_W(WORD_W)) u_buffer (
    .clk     (clk),
    .a_en    (bram_en),
    .a_we    (bram_we),
    .a_addr  (bram_addr),
    .a_wdata (bram_wrdata),
    .a_rdata (bram_rddata),
    .b_en    (mem_en),
    .b_addr  (mem_addr),
    .b_rdata (mem_rdata)
  );

  spi_param_bank u_prm (
    .clk     (clk),
    .rst_n   (rst_n),
    .sck     (spi_sck),
    .mosi    (spi_mosi),
    .miso    (bank_miso),
    .miso_oe (bank_miso_oe),
    .prm     (prm)
  );

  assign reckon_spi_sck  = spi_sck;
  assign reckon_spi_mosi = spi_mosi;
  assign spi_miso        = bank_miso_oe ? bank_miso : reckon_spi_miso;

  aer_decoder #(.ADDR_W(ADDR_W), .ACC_W(ACC_W)) u_dec (
    .clk              (clk),
    .rst_n            (rst_n),
    .mem_en           (mem_en),
    .mem_addr         (mem_addr),
    .mem_rdata        (mem_rdata),
    .new_epoch        (gpio_new_epoch),
    .new_batch        (gpio_new_batch),
    .test             (gpio_test),
    .stop             (gpio_stop),
    .epoch_done       (gpio_epoch_done),
    .batch_done       (gpio_batch_done),
    .prm              (prm),
    .aerin_addr       (reckon_aerin_addr),
    .aerin_req        (reckon_aerin_req),
    .aerin_ack        (reckon_aerin_ack),
    .aerin_tar_en     (reckon_aerin_tar_en),
    .sample           (reckon_sample),
    .target_valid     (reckon_target_valid),
    .infer_acc        (reckon_infer_acc),
    .time_tick        (reckon_time_tick),
    .timing_error_rdy (reckon_timing_error_rdy),
    .out_data         (reckon_out_data),
    .out_req          (reckon_out_req),
    .out_ack          (reckon_out_ack),
    .epoch_acc        (epoch_acc),
    .state_o          (dbg_state),
    .cnt_epochs_o     (dbg_cnt_epochs)
  );

endmodule
