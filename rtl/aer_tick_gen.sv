// aer_tick_gen -- time-tick generator of the AER decoder.
//
// Keeps the current time step of the sample being played back and issues
// ReckOn's TIME_TICK pulses. While `advance` is high it fires one tick as
// soon as (a) ReckOn reports, on TIMING_ERROR_RDY, that it has finished the
// previous time step, and (b) at least `timing` clock cycles (and never fewer
// than MIN_GAP) have passed since the last tick. Each tick is a one-cycle
// pulse on `time_tick` and increments `curr_tick` in the same clock edge.
// `clear` restarts the count at tick 0 for a new sample.
//
// The tick counting and the TIMING_ERROR_RDY readiness rule follow the
// design; the meaning of SPI_TIMING as a minimum tick period and the
// two-cycle minimum gap (so that ReckOn can lower its ready flag before the
// next tick is considered) are this design's own choices.
module aer_tick_gen
  import reckon_soc_pkg::*;
#(
  parameter int unsigned MIN_GAP = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,       // start of a sample: tick count to 0
  input  logic              advance,     // a tick is wanted
  input  logic [PRM_W-1:0]  timing,      // SPI_TIMING
  input  logic              rdy,         // TIMING_ERROR_RDY from ReckOn
  output logic              time_tick,   // TIME_TICK pulse to ReckOn
  output logic [TICK_W-1:0] curr_tick,   // ticks issued in this sample
  output logic              fire         // a tick is issued at this edge
);

  logic [PRM_W-1:0] since;   // clock cycles since the last tick, 1 in the cycle after it (saturating)

  wire [PRM_W-1:0] gap = (timing > PRM_W'(MIN_GAP)) ? timing : PRM_W'(MIN_GAP);

  assign fire = advance && !clear && rdy && (since >= gap);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      time_tick <= 1'b0;
      curr_tick <= '0;
      since     <= '1;
    end else begin
      time_tick <= fire;
      if (clear)     curr_tick <= '0;
      else if (fire) curr_tick <= curr_tick + 1'b1;
      if (fire)                    since <= PRM_W'(1);
      else if (since != '1)        since <= since + 1'b1;
    end
  end

endmodule
