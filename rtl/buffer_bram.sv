// buffer_bram -- shared buffer memory between the ARM processing system and
// the AER decoder.
//
// The ARM side stores one batch of event words here at a time through the
// AXI BRAM controller (port A); the AER decoder reads them back word by word
// (port B). It is a simple dual-port RAM written as an array, so that an FPGA
// tool maps it to block RAM.
//
// Port A: native BRAM-controller port. Byte address (the two LSBs are
//         ignored), 32-bit data, one write enable per byte, read-first,
//         one cycle read latency.
// Port B: read-only, word address, one cycle read latency.
// Both ports run on the single programmable-logic clock.
//
// The buffer and its role follow the design; its depth is this design's
// choice (the design gives no number): 16384 words = 16 RAMB36 tiles in a
// 32-bit configuration, close to the 19 tiles the design reports for the
// PS block, which includes the shared buffer. The two byte-offset bits of
// the port-A address are unused on purpose: the controller always addresses
// whole 32-bit words and selects bytes with the write enables.
module buffer_bram #(
  parameter int unsigned ADDR_W = 14,   // word address width, DEPTH = 2**ADDR_W
  parameter int unsigned DATA_W = 32
) (
  input  logic                  clk,
  // port A: AXI BRAM controller
  input  logic                  a_en,
  input  logic [DATA_W/8-1:0]   a_we,
  input  logic [ADDR_W+1:0]     a_addr,   // byte address
  input  logic [DATA_W-1:0]     a_wdata,
  output logic [DATA_W-1:0]     a_rdata,
  // port B: AER decoder
  input  logic                  b_en,
  input  logic [ADDR_W-1:0]     b_addr,   // word address
  output logic [DATA_W-1:0]     b_rdata
);

  localparam int unsigned DEPTH = 2 ** ADDR_W;

  logic [DATA_W-1:0] mem [DEPTH];

  wire [ADDR_W-1:0] a_word = a_addr[ADDR_W+1:2];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_word];
      for (int b = 0; b < DATA_W/8; b++)
        if (a_we[b]) mem[a_word][8*b +: 8] <= a_wdata[8*b +: 8];
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) b_rdata <= mem[b_addr];
  end

endmodule
