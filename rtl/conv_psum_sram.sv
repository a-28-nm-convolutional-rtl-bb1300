// conv_psum_sram - 16kB psum buffer of the CONV core (512 words x 256 bits).
//
// Stands in for the single-port SRAM macro of the paper: one access per
// cycle, either a read (data on `rdata` one cycle later, held until the next
// read) or a write.  Each word carries the sixteen 16-bit psums of a 4x4
// feature-map tile.  Written as a plain array; a foundry macro would replace
// it in a chip.
module conv_psum_sram #(
  parameter int DEPTH = 512,
  parameter int W     = 256
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [W-1:0]             wdata,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
