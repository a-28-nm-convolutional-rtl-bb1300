// lfsr_unfolded - Fibonacci LFSR unfolded N times.
//
// A W-bit LFSR with feedback x^W + x^TAP + 1 is advanced N steps in one
// clock cycle when `step` is high, so that N fresh pseudo-random bits are
// available every cycle from a single small register (the unfolding
// technique the paper uses to feed 64 or 10 stochastic update units with
// 12-bit random numbers each).  `rnd` holds the N bits the next step will
// produce, computed combinationally from the current state; bit n is the
// feedback bit of step n+1.  The paper sets W=20, N=768 for the hidden-layer
// LFSR and W=17, N=120 for the output layer; the polynomials are this
// design's (maximal-length trinomials).  Reset loads SEED (must be nonzero).
module lfsr_unfolded #(
  parameter int           W    = 20,
  parameter int           TAP  = 17,
  parameter int           N    = 768,
  parameter logic [W-1:0] SEED = W'(1)
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         step,
  output logic [N-1:0] rnd
);
  logic [W-1:0] state, nxt;

  always_comb begin
    nxt = state;
    for (int n = 0; n < N; n++) begin
      rnd[n] = nxt[W-1] ^ nxt[TAP-1];
      nxt    = {nxt[W-2:0], rnd[n]};
    end
  end

  always_ff @(posedge clk) begin
    if (rst)       state <= SEED;
    else if (step) state <= nxt;
  end
endmodule
