// act_regfile - the 490 six-bit CONV activations (CONV_OUT).
//
// Written one entry per cycle by the max-pool pass (index k*49 + ty*7 + tx),
// and presented in full on `conv_out` (2940 bits, entry n at bits
// [6n+5:6n]) for the FC core's 8-way input multiplexer, as in the paper.
// A test read port serves SPI read-back with one-cycle latency.
// Cleared at reset.
module act_regfile
  import spoon_pkg::*;
#(
  parameter int N = N_IN
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   we,
  input  logic [8:0]             widx,
  input  logic [ACT_W-1:0]       wdata,
  output logic [N*ACT_W-1:0]     conv_out,
  input  logic                   spi_re,
  input  logic [8:0]             spi_idx,
  output logic [ACT_W-1:0]       spi_rdata
);
  always_ff @(posedge clk) begin
    if (rst) begin
      conv_out  <= '0;
      spi_rdata <= '0;
    end else begin
      if (we && widx < 9'(N)) conv_out[ACT_W*widx +: ACT_W] <= wdata;
      if (spi_re) spi_rdata <= (spi_idx < 9'(N)) ? conv_out[ACT_W*spi_idx +: ACT_W] : '0;
    end
  end
endmodule
