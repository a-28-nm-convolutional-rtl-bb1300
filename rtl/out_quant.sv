// out_quant - output-layer activation: 3-bit hardsigmoid and derivative.
//
// Each of the ten 16-bit output psums is rescaled by an arithmetic right
// shift of `shift` bits, offset by +4 (the midpoint of the 3-bit range, so a
// zero psum maps to 4 like sigmoid(0)=0.5) and clipped to 0..7 (OUT_ACTS).
// OUT_GRADS is 1 where no clipping occurred (the paper's binary derivative).
// Scaling and offset are this design's choices.  Packing: activation k at
// bits [3k+2:3k].  Combinational.
module out_quant
  import spoon_pkg::*;
(
  input  logic signed [OPSUM_W-1:0] psum [N_OUT],
  input  logic [3:0]                shift,
  output logic [N_OUT*OACT_W-1:0]   acts,
  output logic [N_OUT-1:0]          grads
);
  logic signed [31:0] v;
  always_comb begin
    for (int k = 0; k < N_OUT; k++) begin
      v = (32'(psum[k]) >>> shift) + 32'sd4;
      grads[k] = (v >= 0) && (v <= 7);
      acts[OACT_W*k +: OACT_W] = OACT_W'(clip(v, 0, 7));
    end
  end
endmodule
