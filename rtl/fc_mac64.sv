// fc_mac64 - the FC core's 64-multiplier array with accumulation.
//
// One cycle of hidden-neuron evaluation: 64 signed 6-bit inputs (one batch of
// the CONV activations) times 64 signed 8-bit weights (one 512-bit SRAM
// word, byte b = weight of input b), summed and added to the 23-bit
// accumulator value `acc_in` (23 bits as printed in the paper; 490 x 32 x 128
// < 2^22, so it cannot overflow).  Combinational; the FC controller holds the
// accumulator register.
module fc_mac64
  import spoon_pkg::*;
#(
  parameter int ACCW = ACC_W
) (
  input  logic [BATCH*ACT_W-1:0]  x,
  input  logic [BATCH*W_W-1:0]    w,
  input  logic signed [ACCW-1:0]  acc_in,
  output logic signed [ACCW-1:0]  acc_out
);
  logic signed [ACCW-1:0] sum;
  always_comb begin
    sum = acc_in;
    for (int b = 0; b < BATCH; b++)
      sum += ACCW'(signed'(x[ACT_W*b +: ACT_W]) * signed'(w[W_W*b +: W_W]));
    acc_out = sum;
  end
endmodule
