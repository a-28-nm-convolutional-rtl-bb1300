// conv_mult_array - the 5x5 multiplier array of the CONV core.
//
// For one input event and one kernel, the signed 9-bit timestamp (+ts for an
// ON event, -ts for an OFF event; the paper says the polarity bit is part of
// the 9-bit timestamp, the sign encoding is this design's choice) is
// multiplied by each of the 25 kernel weights.  Products are registered: they
// are valid one cycle after the inputs, and the CONV controller gives the
// array two cycles as in the paper's timing diagram.  Products fit 17 bits
// (255 x -128 = -32640 fits 16 bits; 17 kept for safety).
module conv_mult_array
  import spoon_pkg::*;
#(
  parameter int NT = KSZ * KSZ
) (
  input  logic                    clk,
  input  logic                    en,
  input  logic                    pol,
  input  logic [TS_W-1:0]         ts,
  input  logic signed [KW_W-1:0]  w [NT],
  output logic signed [16:0]      prod [NT]
);
  logic signed [TS_W:0] sts;
  assign sts = pol ? $signed({1'b0, ts}) : -$signed({1'b0, ts});

  always_ff @(posedge clk) begin
    if (en)
      for (int t = 0; t < NT; t++) prod[t] <= 17'(sts * w[t]);
  end
endmodule
