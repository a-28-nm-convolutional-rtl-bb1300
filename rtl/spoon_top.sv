// spoon_top - SPOON, an event-driven convolutional neural network processor
// with on-chip learning for event-based (spiking) vision sensors.
//
// Dataflow: events from a 32x32 retina enter through a four-phase AER bus
// and are convolved event by event in the CONV core (10 kernels 5x5,
// time-to-first-spike weighting).  When the sample ends (timestamp counter
// at zero with an empty FIFO, or INFER_REQ) the CONV core max-pools to 490
// six-bit activations and raises CONV_DONE.  The FC core then evaluates the
// 128 hidden neurons frame-style and updates the 10 output psums
// event-style per hidden neuron, optionally training the weights with direct
// random target projection (DRTP) through the DRTP update module, and sends
// the inferred label on the output AER bus.  All weights and parameters are
// accessible over SPI.  TICK comes from TICK_EXT or the local tick generator.
//
// Ports follow the chip's block diagram.  The on-chip clock generator (and
// its CLKG_EN / CLK_EXT pins) is not modelled: `clk` is the core clock.
// `rst` is synchronous, active high.  LABEL must be held stable from
// CONV_DONE until the label comes out on the AER output bus.  The cores'
// `fc_done` and `sat_event` outputs have no pin of their own on the chip and
// are left unconnected here; they serve as observation points in simulation.
module spoon_top
  import spoon_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // SPI
  input  logic        sck,
  input  logic        mosi,
  output logic        miso,
  // AER input (retina)
  input  logic [10:0] aerin_addr,
  input  logic        aerin_req,
  output logic        aerin_ack,
  // AER output (inferred label)
  output logic [3:0]  aerout_addr,
  output logic        aerout_req,
  input  logic        aerout_ack,
  // control
  input  logic        infer_req,
  input  logic        data_sync,
  input  logic        tick_ext,
  input  logic [3:0]  label
);
  spi_bus_t spi;
  logic [15:0] spi_rdata, conv_rdata, fc_rdata, drtp_rdata;
  cfg_t cfg;
  logic tick;
  logic [N_IN*ACT_W-1:0] conv_out;
  logic conv_done, conv_busy, fc_busy, fc_done, sat_event;
  logic [3:0] inferred;

  spi_slave u_spi (.clk, .rst, .sck, .mosi, .miso, .bus(spi), .bus_rdata(spi_rdata));

  param_bank u_par (
    .clk, .rst, .spi, .conv_rdata, .fc_rdata, .drtp_rdata,
    .conv_busy, .fc_busy, .last_label(inferred), .cfg, .rdata(spi_rdata));

  tick_gen #(.PERIOD_W(16)) u_tick (
    .clk, .rst, .tick_ext, .local_en(cfg.tick_en), .period(cfg.tick_period), .tick);

  conv_core u_conv (
    .clk, .rst, .aer_req(aerin_req), .aer_addr(aerin_addr), .aer_ack(aerin_ack),
    .tick, .data_sync, .infer_req, .gate_en(cfg.gate_en), .cshift(cfg.cshift),
    .spi, .spi_rdata(conv_rdata), .conv_out, .conv_done, .busy(conv_busy), .sat_event);

  // FC <-> DRTP update module
  logic [6:0]  hid_idx;
  logic [2:0]  word_idx;
  logic [BATCH*ACT_W-1:0] hid_in;
  logic signed [HACT_W-1:0] hid_act;
  logic        hid_grad, upd_hid, upd_out, hact_we, capture, prev_act_nz;
  logic [BATCH*W_W-1:0] w_hid, w_next;
  logic [N_OUT*OACT_W-1:0] out_acts;
  logic [N_OUT-1:0] out_grads;

  fc_core u_fc (
    .clk, .rst, .start(conv_done), .conv_out, .train_en(cfg.train_en),
    .hshift(cfg.hshift), .oshift(cfg.oshift),
    .hid_idx, .word_idx, .hid_in, .hid_act, .hid_grad, .w_hid, .upd_hid, .upd_out,
    .hact_we, .capture, .out_acts, .out_grads, .prev_act_nz, .w_next,
    .aerout_req, .aerout_addr, .aerout_ack, .inferred, .done(fc_done), .busy(fc_busy),
    .spi, .spi_rdata(fc_rdata));

  drtp_update u_drtp (
    .clk, .rst, .hid_idx, .word_idx, .upd_hid, .hid_grad, .upd_out, .hact_we, .capture, .prev_act_nz,
    .label, .hid_in, .hid_act, .out_acts, .out_grads, .w_hid,
    .lr_hid(cfg.lr_hid), .lr_out(cfg.lr_out), .w_next, .spi, .spi_rdata(drtp_rdata));
endmodule
