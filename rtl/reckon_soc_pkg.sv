// reckon_soc_pkg -- types and constants shared by the programmable-logic side
// of the ReckOn SoC: the buffer-memory event-word format, the AER decoder
// state encoding and the bundle of run-time parameters held in the SPI bank.
//
// Event word (32 bit, one per buffer-memory location), as laid out by the
// design this RTL follows:
//   [31:24] event code  : 8'h03 spike, 8'h02 label, 8'h01 end of sample
//   [23:12] field       : target neuron of a spike, or the sample's label
//                         (unused for end of sample)
//   [11:0]  target tick : tick at which the spike or label is delivered, or
//                         the last tick of the sample for end of sample
// Codes other than these three are this design's choice to skip.
package reckon_soc_pkg;

  localparam int unsigned WORD_W  = 32;
  localparam int unsigned TICK_W  = 12;   // bits [11:0] of an event word
  localparam int unsigned FIELD_W = 12;   // bits [23:12] of an event word
  localparam int unsigned AER_W   = 8;    // AERIN_ADDR and OUT_DATA width
  localparam int unsigned PRM_W   = 16;   // width chosen for the count registers

  typedef enum logic [7:0] {
    EV_END   = 8'h01,
    EV_LABEL = 8'h02,
    EV_SPIKE = 8'h03
  } ev_code_e;

  typedef struct packed {
    logic [7:0]         code;
    logic [FIELD_W-1:0] field;
    logic [TICK_W-1:0]  tick;
  } ev_word_t;

  // AER decoder FSM states (ARM version of the decoder)
  typedef enum logic [2:0] {
    ST_IDLE  = 3'd0,
    ST_READ  = 3'd1,
    ST_TICK  = 3'd2,
    ST_SPIKE = 3'd3,
    ST_LABEL = 3'd4,
    ST_END_S = 3'd5,
    ST_END_B = 3'd6,
    ST_END_E = 3'd7
  } dec_state_e;

  // Run-time parameters written over SPI and read by the AER decoder
  typedef struct packed {
    logic [PRM_W-1:0]  n_epochs;     // SPI_N_EPOCHS
    logic [PRM_W-1:0]  n_samples;    // SPI_N_SAMPLES  (samples per epoch)
    logic [PRM_W-1:0]  batch_size;   // SPI_BATCH_SIZE (samples per batch)
    logic [PRM_W-1:0]  timing;       // SPI_TIMING     (min. clock cycles between ticks)
    logic [TICK_W-1:0] label_delay;  // SPI_LABEL_DELAY (first tick at which the label is valid)
  } spi_params_t;

  // Register map of the parameter-bank extension (word addresses)
  localparam logic [13:0] PRM_ADDR_N_EPOCHS    = 14'd0;
  localparam logic [13:0] PRM_ADDR_N_SAMPLES   = 14'd1;
  localparam logic [13:0] PRM_ADDR_BATCH_SIZE  = 14'd2;
  localparam logic [13:0] PRM_ADDR_TIMING      = 14'd3;
  localparam logic [13:0] PRM_ADDR_LABEL_DELAY = 14'd4;

  // SPI frame commands, bits [31:30] of a 32-bit frame
  localparam logic [1:0] SPI_CMD_WRITE = 2'b01;
  localparam logic [1:0] SPI_CMD_READ  = 2'b10;

endpackage
