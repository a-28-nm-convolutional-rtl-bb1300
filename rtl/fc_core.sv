// fc_core - fully-connected core: 490-128-10 network with frame-based hidden
// layer, event-driven output layer and the hooks for on-chip learning.
//
// Started by CONV_DONE.  Hidden neurons are evaluated one after the other,
// each in 8 cycles (paper, timing diagram of the FC core):
//   cycle c (1..8): the 64-multiplier array MACs batch c-1 of the inputs
//     (8-way multiplexing of CONV_OUT, batch 7 zero-padded after input 489)
//     with SRAM word {i,c-1}, read one cycle earlier, while word {i,c} is
//     read (at c=8 the next neuron's word {i+1,0} is prefetched; one extra
//     cycle before neuron 0 reads {0,0}).
//   cycle 8: the accumulated sum is quantised (hardtanh, 3 bits) into
//     HID_ACT / HID_GRAD, W_out[.][i] * y_hid is added to the 10 output
//     psums, and the activation is recorded for the next sample's output
//     update.
// With learning enabled, update cycles follow (the paper's optional orange
// cycles 9..16): if HID_GRAD=1 the 8 words {i,0..7} are written back with the
// DRTP update applied (word 7 also carries the output-layer update); if only
// the output-layer update is due (previous activation of neuron i nonzero),
// word 7 alone is written (1 cycle).  The 8 words read for neuron i are held
// in a weight buffer so they can be written back updated; the paper's
// diagram draws a single buffer register and says "data available through
// weight buffer" - the 8-word depth is this design's.
// After neuron 127 the output psums are quantised (hardsigmoid, 3 bits), the
// winner is selected and sent on the AER output bus, and the buffered terms
// for the next output update are captured.  Inference alone takes
// 1 + 128*8 + 1 cycles.
// After reset the weight SRAM is swept to zero (1024 cycles, `busy` high):
// the paper initialises the FC weights to zero for online learning.
// SPI (when idle): addr[15]=1 reads/writes one 16-bit slice of the SRAM.
// The FC core only acts between CONV_DONE and the end of the sample, the
// enable-based equivalent of the paper's clock gating.
module fc_core
  import spoon_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    start,
  input  logic [N_IN*ACT_W-1:0]   conv_out,
  input  logic                    train_en,
  input  logic [3:0]              hshift,
  input  logic [3:0]              oshift,
  // to/from the DRTP update module
  output logic [6:0]              hid_idx,
  output logic [2:0]              word_idx,
  output logic [BATCH*ACT_W-1:0]  hid_in,
  output logic signed [HACT_W-1:0] hid_act,
  output logic                    hid_grad,
  output logic [BATCH*W_W-1:0]    w_hid,
  output logic                    upd_hid,
  output logic                    upd_out,
  output logic                    hact_we,
  output logic                    capture,
  output logic [N_OUT*OACT_W-1:0] out_acts,
  output logic [N_OUT-1:0]        out_grads,
  input  logic                    prev_act_nz,
  input  logic [BATCH*W_W-1:0]    w_next,
  // AER output
  output logic                    aerout_req,
  output logic [3:0]              aerout_addr,
  input  logic                    aerout_ack,
  output logic [3:0]              inferred,
  output logic                    done,
  output logic                    busy,
  // SPI
  input  spi_bus_t                spi,
  output logic [15:0]             spi_rdata
);
  typedef enum logic [2:0] {F_INIT, F_IDLE, F_PRE, F_RUN, F_UPD, F_FIN} state_t;
  state_t state;

  logic [6:0]  nidx;
  logic [3:0]  cyc;          // 1..8 in F_RUN
  logic [2:0]  uword;        // word being written in F_UPD
  logic        upd_hid_q, upd_out_q;
  logic signed [ACC_W-1:0] acc, acc_next;
  logic [BATCH*W_W-1:0] wbuf [N_BATCH];
  logic signed [HACT_W-1:0] act_q;
  logic        grad_q;
  logic [9:0]  init_cnt;

  // SRAM
  logic        sr_en, sr_we;
  logic [31:0] sr_mask;
  logic [9:0]  sr_addr;
  logic [511:0] sr_wdata, sr_rdata;
  fc_weight_sram #(.DEPTH(FCW_WORDS), .W(512)) u_sram (
    .clk, .en(sr_en), .we(sr_we), .wmask(sr_mask), .addr(sr_addr), .wdata(sr_wdata), .rdata(sr_rdata));

  // 8-way input multiplexing
  logic [2:0] bsel;
  always_comb begin
    bsel   = (state == F_UPD) ? uword : 3'(cyc - 4'd1);
    hid_in = '0;
    for (int b = 0; b < BATCH; b++)
      if (32'(bsel) * BATCH + b < N_IN)
        hid_in[ACT_W*b +: ACT_W] = conv_out[ACT_W*(32'(bsel)*BATCH + b) +: ACT_W];
  end

  // hidden neuron: MAC and quantisation
  logic signed [HACT_W-1:0] q_act;
  logic q_grad;
  fc_mac64 u_mac (.x(hid_in), .w(sr_rdata), .acc_in(acc), .acc_out(acc_next));
  hid_quant u_hq (.acc(acc_next), .shift(hshift), .act(q_act), .grad(q_grad));

  // output layer
  logic signed [OPSUM_W-1:0] opsum [N_OUT];
  logic last_cyc;
  assign last_cyc = (state == F_RUN) && (cyc == 4'd8);
  out_layer u_ol (
    .clk, .rst, .clr(start && state == F_IDLE), .en(last_cyc),
    .w_out(sr_rdata[OUTW_BYTE*W_W +: N_OUT*W_W]), .y(q_act), .psum(opsum));
  out_quant u_oq (.psum(opsum), .shift(oshift), .acts(out_acts), .grads(out_grads));
  logic [3:0] winner;
  winner_select u_win (.psum(opsum), .label(winner));

  logic tx_busy;
  aer_tx #(.ADDR_W(4)) u_tx (
    .clk, .rst, .send(state == F_FIN), .label(winner), .busy(tx_busy),
    .aer_req(aerout_req), .aer_addr(aerout_addr), .aer_ack(aerout_ack));

  // outputs to the update module
  assign hid_idx  = nidx;
  assign word_idx = uword;
  assign hid_act  = (state == F_RUN) ? q_act : act_q;
  assign hid_grad = (state == F_RUN) ? q_grad : grad_q;
  assign w_hid    = wbuf[uword];
  assign upd_hid  = (state == F_UPD) && upd_hid_q;
  assign upd_out  = (state == F_UPD) && upd_out_q && uword == 3'd7;
  assign hact_we  = last_cyc && train_en;
  assign capture  = (state == F_FIN) && train_en;

  // SPI slice access
  logic spi_w, spi_q;
  logic [4:0] spi_slice_q;
  assign spi_w = spi.addr[15];

  always_comb begin
    sr_en    = 1'b0;
    sr_we    = 1'b0;
    sr_mask  = '1;
    sr_addr  = '0;
    sr_wdata = '0;
    unique case (state)
      F_INIT: begin
        sr_en = 1'b1; sr_we = 1'b1; sr_addr = init_cnt;
      end
      F_IDLE: begin
        if ((spi.we || spi.re) && spi_w) begin
          sr_en    = 1'b1;
          sr_we    = spi.we;
          sr_addr  = spi.addr[14:5];
          sr_mask  = 32'(1) << spi.addr[4:0];
          sr_wdata = {32{spi.wdata}};
        end
      end
      F_PRE: begin
        sr_en = 1'b1; sr_addr = {nidx, 3'd0};
      end
      F_RUN: begin
        if (cyc < 4'd8) begin
          sr_en = 1'b1; sr_addr = {nidx, 3'(cyc)};
        end else if (nidx != 7'(N_HID-1)) begin
          sr_en = 1'b1; sr_addr = {nidx + 7'd1, 3'd0};
        end
      end
      F_UPD: begin
        sr_en = 1'b1; sr_we = 1'b1; sr_addr = {nidx, uword}; sr_wdata = w_next;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      state     <= F_INIT;
      init_cnt  <= '0;
      nidx      <= '0;
      cyc       <= '0;
      uword     <= '0;
      acc       <= '0;
      act_q     <= '0;
      grad_q    <= 1'b0;
      upd_hid_q <= 1'b0;
      upd_out_q <= 1'b0;
      inferred  <= '0;
      for (int j = 0; j < N_BATCH; j++) wbuf[j] <= '0;
    end else begin
      unique case (state)
        F_INIT: begin
          init_cnt <= init_cnt + 1'b1;
          if (init_cnt == 10'(FCW_WORDS-1)) state <= F_IDLE;
        end
        F_IDLE: begin
          if (start) begin
            nidx  <= '0;
            state <= F_PRE;
          end
        end
        F_PRE: begin
          cyc   <= 4'd1;
          acc   <= '0;
          state <= F_RUN;
        end
        F_RUN: begin
          wbuf[cyc-1] <= sr_rdata;
          acc <= acc_next;
          cyc <= cyc + 1'b1;
          if (cyc == 4'd8) begin
            acc       <= '0;
            cyc       <= 4'd1;
            act_q     <= q_act;
            grad_q    <= q_grad;
            upd_hid_q <= train_en && q_grad;
            upd_out_q <= train_en && prev_act_nz;
            if (train_en && q_grad) begin
              uword <= 3'd0;
              state <= F_UPD;
            end else if (train_en && prev_act_nz) begin
              uword <= 3'd7;
              state <= F_UPD;
            end else if (nidx == 7'(N_HID-1)) begin
              state <= F_FIN;
            end else begin
              nidx <= nidx + 1'b1;
            end
          end
        end
        F_UPD: begin
          uword <= uword + 1'b1;
          if (uword == 3'd7) begin
            uword <= '0;
            if (nidx == 7'(N_HID-1)) state <= F_FIN;
            else begin
              nidx  <= nidx + 1'b1;
              state <= F_RUN;
            end
          end
        end
        F_FIN: begin
          inferred <= winner;
          done     <= 1'b1;
          state    <= F_IDLE;
        end
        default: state <= F_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      spi_q       <= 1'b0;
      spi_slice_q <= '0;
    end else begin
      spi_q       <= spi.re && spi_w && state == F_IDLE;
      spi_slice_q <= spi.addr[4:0];
    end
  end
  assign spi_rdata = spi_q ? sr_rdata[16*spi_slice_q +: 16] : 16'h0000;

  assign busy = (state != F_IDLE) || tx_busy;
endmodule
