// out_layer - 10-multiplier array and output psum register file.
//
// Event-driven output-layer processing: as soon as hidden neuron i has its
// 3-bit activation y, the ten products W_out[k][i] * y are added to the ten
// 16-bit output psums (register file, 0.02kB in the paper).  Additions
// saturate at the 16-bit limits (overflow handling is this design's choice).
// `clr` zeroes the psums at the start of a sample; `en` performs one
// accumulation on the clock edge.  `w_out` byte k is W_out[k][i].
module out_layer
  import spoon_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     clr,
  input  logic                     en,
  input  logic [N_OUT*W_W-1:0]     w_out,
  input  logic signed [HACT_W-1:0] y,
  output logic signed [OPSUM_W-1:0] psum [N_OUT]
);
  logic signed [OPSUM_W-1:0] nxt [N_OUT];
  always_comb begin
    for (int k = 0; k < N_OUT; k++)
      nxt[k] = OPSUM_W'(sat(32'(psum[k]) + 32'(signed'(w_out[W_W*k +: W_W]) * y), OPSUM_W));
  end
  always_ff @(posedge clk) begin
    if (rst || clr) begin
      for (int k = 0; k < N_OUT; k++) psum[k] <= '0;
    end else if (en) begin
      for (int k = 0; k < N_OUT; k++) psum[k] <= nxt[k];
    end
  end
endmodule
