// maxpool_quant - 4x4 max-pooling followed by 6-bit quantisation.
//
// Input is one psum SRAM word: the sixteen signed 16-bit psums of a 4x4
// feature-map tile, i.e. exactly one stride-4 pooling window.  The maximum is
// rescaled by an arithmetic right shift of `shift` bits (the paper's
// "configurable rescaling") and clipped to a signed 6-bit activation
// (-32..31).  Shift-and-clip is this design's choice of rescaling.
// Combinational.
module maxpool_quant
  import spoon_pkg::*;
(
  input  logic [255:0]              psums,
  input  logic [3:0]                shift,
  output logic signed [ACT_W-1:0]   act
);
  logic signed [15:0] m;
  logic signed [31:0] r;
  always_comb begin
    m = signed'(psums[15:0]);
    for (int l = 1; l < 16; l++)
      if (signed'(psums[16*l +: 16]) > m) m = signed'(psums[16*l +: 16]);
    r   = 32'(m) >>> shift;
    act = ACT_W'(sat(r, ACT_W));
  end
endmodule
