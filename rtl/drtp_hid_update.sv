// drtp_hid_update - hidden-layer weight update with direct random target
// projection (DRTP).
//
// DRTP replaces the back-propagated error of hidden neuron i by a fixed
// random sign selected by the training label: delta_y_hid[i] = B_hid[i][label]
// (binary).  The update for the 64 weights of one SRAM word is then
//   dW_hid[i][n] = -eta * delta_y * f'(i) * x[n]
// so the only arithmetic is a label-dependent sign inversion of the 64 6-bit
// inputs: bit B=1 (delta_y=+1) gives update value -x, B=0 gives +x (-(-32)
// saturates to +31).  The values drive 64 stochastic update units fed with
// 12-bit random numbers from a 20-bit LFSR unfolded 768 times (both sizes as
// printed in the paper).  The derivative f' = HID_GRAD is the enable: with
// en=0 the weights pass unchanged.  `step` advances the LFSR (one update
// cycle).  B_hid is a 128 x 10-bit register file, loaded at reset with fixed
// pseudo-random bits (16-bit LFSR, seed 0x1D2B, this design's choice) and
// writable/readable over SPI.  Combinational from inputs to `w_next`; SPI
// read data one cycle after `spi_re`.
module drtp_hid_update
  import spoon_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   en,
  input  logic                   step,
  input  logic [6:0]             hid_idx,
  input  logic [3:0]             label,
  input  logic [BATCH*ACT_W-1:0] hid_in,
  input  logic [BATCH*W_W-1:0]   w_hid,
  input  logic [3:0]             lr,
  output logic [BATCH*W_W-1:0]   w_next,
  input  logic                   spi_we,
  input  logic                   spi_re,
  input  logic [6:0]             spi_idx,
  input  logic [N_OUT-1:0]       spi_wdata,
  output logic [N_OUT-1:0]       spi_rdata
);
  typedef logic [N_OUT-1:0] bhid_t [N_HID];
  function automatic bhid_t init_b();
    bhid_t v;
    logic [15:0] l = 16'h1D2B;
    for (int i = 0; i < N_HID; i++) begin
      for (int s = 0; s < N_OUT; s++)
        l = {l[14:0], l[15] ^ l[13] ^ l[12] ^ l[10]};
      v[i] = l[N_OUT-1:0];
    end
    return v;
  endfunction
  localparam bhid_t B_INIT = init_b();

  logic [N_OUT-1:0] bmem [N_HID];
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N_HID; i++) bmem[i] <= B_INIT[i];
      spi_rdata <= '0;
    end else begin
      if (spi_we) bmem[spi_idx] <= spi_wdata;
      if (spi_re) spi_rdata <= bmem[spi_idx];
    end
  end

  logic [BATCH*SEED_W-1:0] rnd;
  lfsr_unfolded #(.W(20), .TAP(17), .N(BATCH*SEED_W), .SEED(20'h5A5A5)) u_lfsr (
    .clk, .rst, .step, .rnd);

  logic bsel;
  assign bsel = (label < 4'(N_OUT)) ? bmem[hid_idx][label] : 1'b0;

  for (genvar b = 0; b < BATCH; b++) begin : g_unit
    logic signed [ACT_W-1:0] xb, ub;
    logic signed [W_W-1:0]   wb;
    logic                    chg;
    assign xb = signed'(hid_in[ACT_W*b +: ACT_W]);
    assign ub = !bsel ? xb : (xb == -6'sd32) ? 6'sd31 : -xb;
    stoch_update #(.VW(ACT_W)) u_su (
      .v(ub), .rnd(rnd[SEED_W*b +: SEED_W]), .lr, .w(signed'(w_hid[W_W*b +: W_W])),
      .w_next(wb), .changed(chg));
    assign w_next[W_W*b +: W_W] = en ? wb : w_hid[W_W*b +: W_W];
  end
endmodule
