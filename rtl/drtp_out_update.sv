// drtp_out_update - output-layer weight update (same rule as backprop):
//   dW_out[k][i] = -eta_out * (e[k] * f'_out[k]) * y_hid[i]
//
// The output activations and derivatives of a sample are only known after all
// 128 hidden neurons, so, as in the paper, the update of W_out[.][i] made
// while neuron i of sample n is processed uses the buffered terms of sample
// n-1: previous output activations and derivatives and the previous label
// (registers loaded by `capture` at the end of a training sample), and the
// previous activation of hidden neuron i (a 128 x 3-bit register file).
//
// `hact_we` (while neuron i is evaluated) loads the old activation of neuron
// i into `prev_act` and stores the new one.  `prev_act_nz` (combinational,
// from the regfile entry addressed by hid_idx) tells the controller whether
// an update is due; a zero previous activation skips it.  In the update
// cycle, for each output k: target t[k] = 7 if k = previous label else 0
// (the "thermometer code" of the paper's diagram is read here as a one-hot
// 3-bit target, this design's choice), error e = act - t, gated by the
// derivative, multiplied by prev_act and saturated to 5 bits; the negated
// product drives a stochastic update unit with a 12-bit number from a 17-bit
// LFSR unfolded 120 times (sizes as printed in the paper).  `step` advances
// the LFSR.  With en=0, w_next = w_out.  The regfile resets to zero, so the
// first sample after reset makes no output update.
module drtp_out_update
  import spoon_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    en,
  input  logic                    step,
  input  logic [6:0]              hid_idx,
  input  logic                    hact_we,
  input  logic signed [HACT_W-1:0] hid_act,
  output logic                    prev_act_nz,
  input  logic                    capture,
  input  logic [N_OUT*OACT_W-1:0] out_acts,
  input  logic [N_OUT-1:0]        out_grads,
  input  logic [3:0]              label,
  input  logic [N_OUT*W_W-1:0]    w_out,
  input  logic [3:0]              lr,
  output logic [N_OUT*W_W-1:0]    w_next,
  input  logic                    spi_re,
  input  logic [6:0]              spi_idx,
  output logic [HACT_W-1:0]       spi_rdata
);
  logic [HACT_W-1:0]       hprev [N_HID];
  logic signed [HACT_W-1:0] prev_act;
  logic [N_OUT*OACT_W-1:0] pacts;
  logic [N_OUT-1:0]        pgrads;
  logic [3:0]              plabel;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N_HID; i++) hprev[i] <= '0;
      prev_act  <= '0;
      pacts     <= '0;
      pgrads    <= '0;
      plabel    <= '0;
      spi_rdata <= '0;
    end else begin
      if (hact_we) begin
        prev_act       <= signed'(hprev[hid_idx]);
        hprev[hid_idx] <= hid_act;
      end
      if (capture) begin
        pacts  <= out_acts;
        pgrads <= out_grads;
        plabel <= label;
      end
      if (spi_re) spi_rdata <= hprev[spi_idx];
    end
  end
  assign prev_act_nz = (hprev[hid_idx] != '0);

  logic [N_OUT*SEED_W-1:0] rnd;
  lfsr_unfolded #(.W(17), .TAP(14), .N(N_OUT*SEED_W), .SEED(17'h0ACE5)) u_lfsr (
    .clk, .rst, .step, .rnd);

  for (genvar k = 0; k < N_OUT; k++) begin : g_unit
    logic signed [4:0]  e, u;
    logic signed [31:0] p;
    logic signed [W_W-1:0] wk;
    logic chg;
    always_comb begin
      e = (k == int'(plabel)) ? 5'(pacts[OACT_W*k +: OACT_W]) - 5'sd7
                              : 5'(pacts[OACT_W*k +: OACT_W]);
      if (!pgrads[k]) e = '0;
      p = clip(32'(e) * 32'(prev_act), -15, 15);
      u = 5'(-p);
    end
    stoch_update #(.VW(5)) u_su (
      .v(u), .rnd(rnd[SEED_W*k +: SEED_W]), .lr, .w(signed'(w_out[W_W*k +: W_W])),
      .w_next(wk), .changed(chg));
    assign w_next[W_W*k +: W_W] = en ? wk : w_out[W_W*k +: W_W];
  end
endmodule
