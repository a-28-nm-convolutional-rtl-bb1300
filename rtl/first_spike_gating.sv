// first_spike_gating - optional filter keeping only the first spike per pixel.
//
// When enabled, one flag per pixel (1024 for a 32x32 sensor, both
// polarities sharing it) records that the pixel has already spiked in the
// current sample; later events of that pixel are dropped.  The flags are
// cleared by DATA_SYNC.  The check is combinational: `pass` tells, for the
// event on the input, whether it goes on to the FIFO; `mark` (the event is
// actually accepted) sets the flag on the next clock edge.  When disabled
// every event passes.  The feature is from the paper; the flag-array
// structure is this design's choice.
module first_spike_gating #(
  parameter int NPIX = 1024
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    enable,
  input  logic                    clear,
  input  logic [$clog2(NPIX)-1:0] pix,
  input  logic                    mark,
  output logic                    pass
);
  logic [NPIX-1:0] seen;

  always_ff @(posedge clk) begin
    if (rst || clear)     seen <= '0;
    else if (mark)        seen[pix] <= 1'b1;
  end

  assign pass = !enable || !seen[pix];
endmodule
