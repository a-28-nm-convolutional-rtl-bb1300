// conv_kernel_rf - register file of the ten 5x5 8-bit convolution kernels.
//
// The paper initialises the kernels randomly at reset (on-chip learning keeps
// them fixed and random) and makes them programmable.  Here reset loads each
// of the 250 weights with a value from a 16-bit maximal-length LFSR
// (x^16+x^14+x^13+x^11+1, seed 0xACE1), computed at elaboration, so the
// "random" kernels are the same after every reset; this generator is this
// design's choice.  Index n = k*25 + ky*5 + kx.
//
// Read port: `rd` loads all 25 weights of kernel `rd_k` into `w` on the next
// clock edge (the "R" access one cycle before a kernel is used, as in the
// paper's CONV timing diagram).  SPI port: one byte per access, write or read
// with one-cycle read latency.
module conv_kernel_rf
  import spoon_pkg::*;
#(
  parameter int NK  = N_KER,
  parameter int KS  = KSZ
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     rd,
  input  logic [3:0]               rd_k,
  output logic signed [KW_W-1:0]   w [KS*KS],
  input  logic                     spi_we,
  input  logic                     spi_re,
  input  logic [7:0]               spi_idx,
  input  logic [KW_W-1:0]          spi_wdata,
  output logic [KW_W-1:0]          spi_rdata
);
  localparam int N = NK * KS * KS;

  typedef logic [KW_W-1:0] init_t [N];
  function automatic init_t init_values();
    init_t v;
    logic [15:0] l = 16'hACE1;
    for (int n = 0; n < N; n++) begin
      for (int s = 0; s < 8; s++)
        l = {l[14:0], l[15] ^ l[13] ^ l[12] ^ l[10]};
      v[n] = l[7:0];
    end
    return v;
  endfunction
  localparam init_t INIT = init_values();

  logic [KW_W-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int n = 0; n < N; n++) mem[n] <= INIT[n];
    end else if (spi_we && spi_idx < 8'(N)) begin
      mem[spi_idx] <= spi_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int t = 0; t < KS*KS; t++) w[t] <= '0;
      spi_rdata <= '0;
    end else begin
      if (rd)
        for (int t = 0; t < KS*KS; t++) w[t] <= mem[32'(rd_k) * KS * KS + t];
      if (spi_re) spi_rdata <= (spi_idx < 8'(N)) ? mem[spi_idx] : '0;
    end
  end
endmodule
