// winner_select - picks the inferred label from the output psums.
//
// Returns the index (0..9) of the largest of the ten signed 16-bit output
// psums; on a tie the lowest index wins (tie rule is this design's choice).
// Combinational.
module winner_select
  import spoon_pkg::*;
(
  input  logic signed [OPSUM_W-1:0] psum [N_OUT],
  output logic [3:0]                label
);
  logic signed [OPSUM_W-1:0] best;
  always_comb begin
    best  = psum[0];
    label = '0;
    for (int k = 1; k < N_OUT; k++)
      if (psum[k] > best) begin
        best  = psum[k];
        label = 4'(k);
      end
  end
endmodule
