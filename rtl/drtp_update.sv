// drtp_update - the DRTP weight update module of the chip.
//
// Combines the hidden-layer unit (DRTP, current sample) and the output-layer
// unit (previous sample's error) and forms W_NEXT, the 512-bit word written
// back to the FC weight SRAM during an update cycle.  In word j of neuron i
// the 64 hidden weights come from the hidden unit; in word 7 the bytes 42..51
// (the ten output weights W_out[.][i]) come from the output unit instead.
// The paper draws this as a multiplexer between "next hidden layer weights"
// and "next output layer weights"; the byte-level merge follows from the
// weight layout chosen for the SRAM.  SPI: REG_BHID reads/writes B_hid rows,
// REG_HPREV reads previous hidden activations, data one cycle after the read
// strobe.
module drtp_update
  import spoon_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst,
  // control from the FC core
  input  logic [6:0]              hid_idx,
  input  logic [2:0]              word_idx,
  input  logic                    upd_hid,     // update cycle of the hidden weights
  input  logic                    hid_grad,    // HID_GRAD: enables the hidden update
  input  logic                    upd_out,     // apply output update (word 7)
  input  logic                    hact_we,
  input  logic                    capture,
  output logic                    prev_act_nz,
  // data
  input  logic [3:0]              label,
  input  logic [BATCH*ACT_W-1:0]  hid_in,
  input  logic signed [HACT_W-1:0] hid_act,
  input  logic [N_OUT*OACT_W-1:0] out_acts,
  input  logic [N_OUT-1:0]        out_grads,
  input  logic [BATCH*W_W-1:0]    w_hid,
  input  logic [3:0]              lr_hid,
  input  logic [3:0]              lr_out,
  output logic [BATCH*W_W-1:0]    w_next,
  // SPI
  input  spi_bus_t                spi,
  output logic [15:0]             spi_rdata
);
  localparam int OB = OUTW_BYTE * W_W;   // bit offset of W_out in word 7

  logic [BATCH*W_W-1:0] hid_next;
  logic [N_OUT*W_W-1:0] out_next;
  logic [N_OUT-1:0]     b_rdata;
  logic [HACT_W-1:0]    h_rdata;
  logic spi_b, spi_h, spi_b_q, spi_h_q;

  assign spi_b = !spi.addr[15] && spi.addr[14:12] == REG_BHID[2:0];
  assign spi_h = !spi.addr[15] && spi.addr[14:12] == REG_HPREV[2:0];

  drtp_hid_update u_hid (
    .clk, .rst, .en(upd_hid && hid_grad), .step(upd_hid && hid_grad), .hid_idx, .label, .hid_in,
    .w_hid, .lr(lr_hid), .w_next(hid_next),
    .spi_we(spi.we && spi_b), .spi_re(spi.re && spi_b), .spi_idx(spi.addr[6:0]),
    .spi_wdata(spi.wdata[N_OUT-1:0]), .spi_rdata(b_rdata));

  drtp_out_update u_out (
    .clk, .rst, .en(upd_out), .step(upd_out), .hid_idx, .hact_we, .hid_act,
    .prev_act_nz, .capture, .out_acts, .out_grads, .label,
    .w_out(w_hid[OB +: N_OUT*W_W]), .lr(lr_out), .w_next(out_next),
    .spi_re(spi.re && spi_h), .spi_idx(spi.addr[6:0]), .spi_rdata(h_rdata));

  always_comb begin
    w_next = hid_next;
    if (word_idx == 3'd7 && upd_out) w_next[OB +: N_OUT*W_W] = out_next;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      spi_b_q <= 1'b0;
      spi_h_q <= 1'b0;
    end else begin
      spi_b_q <= spi.re && spi_b;
      spi_h_q <= spi.re && spi_h;
    end
  end
  assign spi_rdata = spi_b_q ? 16'(b_rdata) : spi_h_q ? 16'(h_rdata) : 16'h0000;
endmodule
