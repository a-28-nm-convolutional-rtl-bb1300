// hid_quant - hidden-layer activation: 3-bit hardtanh and its derivative.
//
// The weighted sum of a hidden neuron (23-bit) is rescaled by an arithmetic
// right shift of `shift` bits and clipped to -3..+3 (HID_ACT, 3-bit signed).
// The binary derivative HID_GRAD is 1 inside the linear range (the rescaled
// value is within -3..+3) and 0 where clipping occurred, as the paper
// describes.  The shift-based scaling and the symmetric range are this
// design's choices.  Combinational.
module hid_quant
  import spoon_pkg::*;
(
  input  logic signed [ACC_W-1:0]  acc,
  input  logic [3:0]               shift,
  output logic signed [HACT_W-1:0] act,
  output logic                     grad
);
  logic signed [31:0] v;
  always_comb begin
    v    = 32'(acc) >>> shift;
    grad = (v >= -3) && (v <= 3);
    act  = HACT_W'(clip(v, -3, 3));
  end
endmodule
