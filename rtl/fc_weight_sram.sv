// fc_weight_sram - 64kB FC weight memory (1024 words x 512 bits).
//
// Holds the 490x128 hidden weights and the 128x10 output weights, all 8-bit.
// Word {i, j} (address i*8 + j) holds, for hidden neuron i, the 64 weights of
// input batch j in bytes 0..63; batch 7 has only 42 inputs (448..489) and
// bytes 42..51 of word 7 hold the ten output weights W_out[0..9][i].  The
// paper gives 8 words per neuron and 500 weights; the byte placement is this
// design's.  Single port: a read returns data one cycle later, held until the
// next read; a write updates the 16-bit slices selected by `wmask` (SPI writes
// one slice, the learning engine writes whole words).  Written as an array in
// place of the SRAM macro.
module fc_weight_sram #(
  parameter int DEPTH = 1024,
  parameter int W     = 512
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [W/16-1:0]          wmask,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [W-1:0]             wdata,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int s = 0; s < W/16; s++)
          if (wmask[s]) mem[addr][16*s +: 16] <= wdata[16*s +: 16];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
