// spi_slave - serial access to all weights and parameters.
//
// The chip exposes only SCK, MOSI and MISO (no chip select), so frames have a
// fixed length counted from reset: 40 bits, MSB first,
//   [39:32] command  (8'h01 write, 8'h02 read)
//   [31:16] 16-bit address (SPI_ADDR)
//   [15:0]  16-bit data    (SPI_DATA_I for a write; don't-care for a read)
// MOSI is sampled on rising SCK.  For a read, a one-cycle `bus_re` strobe is
// issued after the 24th bit and `bus_rdata` (SPI_DATA_O) is captured two
// clock cycles later; its 16 bits are driven on MISO MSB first, changing on
// falling SCK, so the master samples them on rising edges 25..40.  A write
// issues a one-cycle `bus_we` strobe after the 40th bit.  SCK is oversampled
// by CLK through a two-flop synchroniser, so SCK must be at most CLK/8.  The
// paper gives the bus and its 16-bit address/data widths; the frame format is
// this design's.
module spi_slave
  import spoon_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        sck,
  input  logic        mosi,
  output logic        miso,
  output spi_bus_t    bus,
  input  logic [15:0] bus_rdata
);
  logic [2:0]  sck_s;
  logic [1:0]  mosi_s;
  logic        rise, fall;
  logic [5:0]  bitcnt;
  logic [39:0] rx;
  logic [15:0] tx;
  logic [1:0]  rd_pipe;

  assign rise = sck_s[1] && !sck_s[2];
  assign fall = !sck_s[1] && sck_s[2];

  always_ff @(posedge clk) begin
    if (rst) begin
      sck_s   <= '0;
      mosi_s  <= '0;
      bitcnt  <= '0;
      rx      <= '0;
      tx      <= '0;
      rd_pipe <= '0;
      bus     <= '0;
    end else begin
      sck_s   <= {sck_s[1:0], sck};
      mosi_s  <= {mosi_s[0], mosi};
      bus.we  <= 1'b0;
      bus.re  <= 1'b0;
      rd_pipe <= {rd_pipe[0], 1'b0};
      if (rise) begin
        rx     <= {rx[38:0], mosi_s[1]};
        bitcnt <= bitcnt + 1'b1;
        if (bitcnt == 6'd23 && rx[22:15] == 8'h02) begin
          bus.re   <= 1'b1;
          bus.addr <= {rx[14:0], mosi_s[1]};
          rd_pipe  <= {rd_pipe[0], 1'b1};
        end
        if (bitcnt == 6'd39) begin
          bitcnt <= '0;
          if (rx[38:31] == 8'h01) begin
            bus.we    <= 1'b1;
            bus.addr  <= rx[30:15];
            bus.wdata <= {rx[14:0], mosi_s[1]};
          end
        end
      end
      if (rd_pipe[1]) tx <= bus_rdata;
      else if (fall && bitcnt >= 6'd25) tx <= {tx[14:0], 1'b0};
    end
  end
  assign miso = tx[15];
endmodule
