// stoch_update - one stochastic weight-update unit.
//
// The paper turns the update value into a probability of a +1 or -1 change of
// the 8-bit weight, decided with an LFSR number and a configurable learning
// rate.  Here: the magnitude |v| of the signed update value is shifted left by
// `lr` bits and compared with a 12-bit random number; if it is larger, the
// weight moves by one step in the direction of sign(v), saturating at -128 and
// +127.  So P(change) = min(|v| * 2^lr, 4096) / 4096.  The exact comparison is
// this design's choice.  Combinational.
module stoch_update
  import spoon_pkg::*;
#(
  parameter int VW = 6
) (
  input  logic signed [VW-1:0]     v,
  input  logic [SEED_W-1:0]        rnd,
  input  logic [3:0]               lr,
  input  logic signed [W_W-1:0]    w,
  output logic signed [W_W-1:0]    w_next,
  output logic                     changed
);
  logic [31:0] mag, p;
  always_comb begin
    mag     = (v < 0) ? 32'(-32'(v)) : 32'(v);
    p       = mag << lr;
    changed = 1'b0;
    w_next  = w;
    if (p > 32'(rnd)) begin
      if (v > 0 && w != 8'sd127)  begin w_next = w + 8'sd1; changed = 1'b1; end
      if (v < 0 && w != -8'sd128) begin w_next = w - 8'sd1; changed = 1'b1; end
    end
  end
endmodule
