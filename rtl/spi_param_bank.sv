// spi_param_bank -- the run-time registers that extend ReckOn's SPI
// parameter bank for the AER decoder: number of epochs, samples per epoch,
// samples per batch, tick timing and label delay.
//
// How it works. The ARM side reaches the bank through an AXI Quad SPI bridge
// set up for one slave and single-line MOSI/MISO. The bus has three wires,
// SCK, MOSI and MISO, as in ReckOn's own SPI port; there is no chip select,
// so frames are fixed at 32 bits and counted from reset. SCK is sampled in
// the system clock domain through a two-flop synchroniser (SCK must be at
// most clk/4). SPI mode 0: MOSI is taken on the rising SCK edge, MISO changes
// after the falling edge. A frame, MSB first:
//   [31:30] command : 2'b01 write, 2'b10 read (others are ignored)
//   [29:16] address : word address within the bank (see reckon_soc_pkg)
//   [15:0]  data    : write data, or read data shifted out on MISO
// A write takes effect after the 32nd rising SCK edge. For a read, the
// register is looked up after the 16th bit and shifted out during the data
// bits; `miso_oe` is high then, so the wrapper can share MISO with the rest
// of ReckOn's SPI slave.
//
// What follows the design: the five parameters, their SPI origin and their
// use by the decoder. Frame format, addresses, widths, the oversampled SCK,
// and the reset values (those of the cue-accumulation run: 10 epochs of 50
// samples in one batch) are this design's choices.
module spi_param_bank
  import reckon_soc_pkg::*;
#(
  parameter logic [PRM_W-1:0]  RST_N_EPOCHS    = 16'd10,
  parameter logic [PRM_W-1:0]  RST_N_SAMPLES   = 16'd50,
  parameter logic [PRM_W-1:0]  RST_BATCH_SIZE  = 16'd50,
  parameter logic [PRM_W-1:0]  RST_TIMING      = 16'd2,
  parameter logic [TICK_W-1:0] RST_LABEL_DELAY = 12'd0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sck,
  input  logic        mosi,
  output logic        miso,
  output logic        miso_oe,
  output spi_params_t prm
);

  logic [2:0]  sck_sync;
  logic [1:0]  mosi_sync;
  logic [4:0]  bit_cnt;        // bits received in the current frame
  logic [30:0] shreg;          // received bits, MSB first
  logic [15:0] rd_shift;       // read data being shifted out
  logic        rd_active;

  wire sck_rise = sck_sync[1] && !sck_sync[2];
  wire sck_fall = !sck_sync[1] && sck_sync[2];
  wire mosi_s   = mosi_sync[1];

  // header is complete once 16 bits are in: {cmd, addr} = shreg[15:0]
  wire [1:0]  hdr_cmd  = shreg[15:14];
  wire [13:0] hdr_addr = shreg[13:0];
  wire [31:0] frame    = {shreg, mosi_s};

  function automatic logic [PRM_W-1:0] reg_read(input logic [13:0] a, input spi_params_t p);
    unique case (a)
      PRM_ADDR_N_EPOCHS:    return p.n_epochs;
      PRM_ADDR_N_SAMPLES:   return p.n_samples;
      PRM_ADDR_BATCH_SIZE:  return p.batch_size;
      PRM_ADDR_TIMING:      return p.timing;
      PRM_ADDR_LABEL_DELAY: return PRM_W'(p.label_delay);
      default:              return '0;
    endcase
  endfunction

  function automatic logic hit(input logic [13:0] a);
    return a <= PRM_ADDR_LABEL_DELAY;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sck_sync  <= '0;
      mosi_sync <= '0;
      bit_cnt   <= '0;
      shreg     <= '0;
      rd_shift  <= '0;
      rd_active <= 1'b0;
      miso      <= 1'b0;
      prm.n_epochs    <= RST_N_EPOCHS;
      prm.n_samples   <= RST_N_SAMPLES;
      prm.batch_size  <= RST_BATCH_SIZE;
      prm.timing      <= RST_TIMING;
      prm.label_delay <= RST_LABEL_DELAY;
    end else begin
      sck_sync  <= {sck_sync[1:0], sck};
      mosi_sync <= {mosi_sync[0], mosi};

      if (sck_rise) begin
        shreg   <= {shreg[29:0], mosi_s};
        bit_cnt <= bit_cnt + 1'b1;       // wraps to 0 after 32 bits
        if (bit_cnt == 5'd31) begin
          rd_active <= 1'b0;
          if (frame[31:30] == SPI_CMD_WRITE) begin
            unique case (frame[29:16])
              PRM_ADDR_N_EPOCHS:    prm.n_epochs    <= frame[15:0];
              PRM_ADDR_N_SAMPLES:   prm.n_samples   <= frame[15:0];
              PRM_ADDR_BATCH_SIZE:  prm.batch_size  <= frame[15:0];
              PRM_ADDR_TIMING:      prm.timing      <= frame[15:0];
              PRM_ADDR_LABEL_DELAY: prm.label_delay <= frame[TICK_W-1:0];
              default: ;
            endcase
          end
        end
      end

      // after the 16th rising edge the header is known; the first data bit
      // goes out on the following falling edge
      if (sck_fall) begin
        if (bit_cnt == 5'd16 && hdr_cmd == SPI_CMD_READ && hit(hdr_addr)) begin
          rd_active <= 1'b1;
          {miso, rd_shift} <= {reg_read(hdr_addr, prm), 1'b0};
        end else if (rd_active) begin
          {miso, rd_shift} <= {rd_shift, 1'b0};
        end
      end
    end
  end

  assign miso_oe = rd_active;

endmodule
