// conv_accum - psum update with overflow protection (CONV core "Accumulation").
//
// Takes a 256-bit psum word (16 lanes of signed 16 bits), the 25 products of
// the 5x5 multiplier array and, per lane, an enable and a tap index from the
// address decoder.  Each enabled lane adds its product; the sum saturates at
// +32767 / -32768, which is how the paper's overflow protection emulates a
// hardtanh activation.  `sat_hit` flags that some lane saturated.
// Combinational.
module conv_accum
  import spoon_pkg::*;
(
  input  logic [255:0]        psum_in,
  input  logic signed [16:0]  prod [KSZ*KSZ],
  input  logic                lane_en  [16],
  input  logic [4:0]          lane_tap [16],
  output logic [255:0]        psum_out,
  output logic                sat_hit
);
  logic signed [31:0] s;
  always_comb begin
    sat_hit  = 1'b0;
    s        = '0;
    psum_out = psum_in;
    for (int l = 0; l < 16; l++) begin
      if (lane_en[l]) begin
        s = 32'(signed'(psum_in[16*l +: 16])) + 32'(prod[lane_tap[l]]);
        if (s != sat(s, PSUM_W)) sat_hit = 1'b1;
        psum_out[16*l +: 16] = 16'(sat(s, PSUM_W));
      end
    end
  end
endmodule
