// conv_core - event-driven convolution layer and frame-based max-pooling.
//
// Input events arrive over the AER receiver as {polarity, x, y}.  While a
// sample is open (from DATA_SYNC until the timestamp counter reaches zero or
// INFER_REQ is raised) each event, optionally filtered by first-spike gating,
// is stamped with the 8-bit timestamp and pushed into the 32-stage FIFO.
// Events arriving while no sample is open are acknowledged and dropped.
//
// Event processing follows the paper's timing diagram: the 10 kernels are
// processed one after the other, 10 cycles each, so one event takes 100
// cycles (back-to-back events are popped without a gap):
//   cycle 0-1 : 5x5 multiplier array, timestamp x kernel k
//   cycle 2-9 : four read/write pairs on the psum SRAM (loc0..loc3), each
//               adding the products to a 4x4 tile with saturation
//   cycle 9   : kernel register file read of kernel k+1
// When the sample is closed and the FIFO is empty, a max-pool pass reads the
// 490 psum words (2 cycles per word: read, then write the 6-bit activation
// and clear the word to zero for the next sample) and pulses `conv_done`.
// INFER_REQ closes the sample early and flushes the FIFO (the event being
// processed is finished).  After reset the psum SRAM is cleared (512 cycles,
// `busy` high).  Clearing by the pooling pass and the early-flush policy are
// this design's choices.
//
// SPI: region REG_KER reads/writes kernel bytes, REG_ACT reads activations;
// `spi_rdata` is valid the cycle after a read strobe.
module conv_core
  import spoon_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst,
  // AER input
  input  logic                  aer_req,
  input  logic [10:0]           aer_addr,
  output logic                  aer_ack,
  // control
  input  logic                  tick,
  input  logic                  data_sync,
  input  logic                  infer_req,
  input  logic                  gate_en,
  input  logic [3:0]            cshift,
  // SPI
  input  spi_bus_t              spi,
  output logic [15:0]           spi_rdata,
  // to FC core
  output logic [N_IN*ACT_W-1:0] conv_out,
  output logic                  conv_done,
  output logic                  busy,
  output logic                  sat_event   // a psum saturated (overflow protection)
);
  // ---------------- input side ----------------
  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_EVENT, S_POOL} state_t;
  state_t state;
  logic       ev_valid, ev_ready, ev_pol;
  logic [4:0] ev_x, ev_y;
  logic [TS_W-1:0] ts;
  logic       expired, pass, push;
  logic       fifo_in_ready, fifo_out_valid, fifo_pop, fifo_empty, fifo_flush;
  logic [EV_W-1:0] fifo_out;
  logic       sample_open, pool_pending;

  aer_rx #(.ADDR_W(11)) u_aer (
    .clk, .rst, .aer_req, .aer_addr, .aer_ack,
    .ev_valid, .ev_ready, .ev_pol, .ev_x, .ev_y);

  timestamp_counter #(.TS_W(TS_W)) u_ts (
    .clk, .rst, .data_sync, .tick, .ts, .expired);

  first_spike_gating #(.NPIX(IMG*IMG)) u_gate (
    .clk, .rst, .enable(gate_en), .clear(data_sync),
    .pix({ev_y, ev_x}), .mark(push), .pass);

  // drop when no sample is open or gated, otherwise wait for FIFO space
  assign push     = ev_valid && sample_open && pass && fifo_in_ready;
  assign ev_ready = !sample_open || !pass || fifo_in_ready;

  event_fifo #(.DEPTH(32), .W(EV_W)) u_fifo (
    .clk, .rst, .flush(fifo_flush),
    .in_valid(push), .in_ready(fifo_in_ready),
    .in_data({ev_pol, ts, ev_x, ev_y}),
    .out_valid(fifo_out_valid), .out_ready(fifo_pop), .out_data(fifo_out),
    .empty(fifo_empty));

  // sample window
  always_ff @(posedge clk) begin
    if (rst) begin
      sample_open  <= 1'b0;
      pool_pending <= 1'b0;
    end else if (data_sync) begin
      sample_open  <= 1'b1;
    end else if (sample_open && (expired || infer_req)) begin
      sample_open  <= 1'b0;
      pool_pending <= 1'b1;
    end else if (state == S_POOL) begin
      pool_pending <= 1'b0;
    end
  end
  assign fifo_flush = sample_open && infer_req && !data_sync;

  // ---------------- datapath ----------------
  logic [3:0]  kidx;
  logic [3:0]  cyc;
  logic [9:0]  widx;
  logic        pool_phase;
  logic        ev_pol_q;
  logic [TS_W-1:0] ev_ts_q;
  logic [4:0]  ev_x_q, ev_y_q;

  logic        kr_rd;
  logic [3:0]  kr_k;
  logic signed [KW_W-1:0] kw [KSZ*KSZ];
  logic [KW_W-1:0] ker_rdata;
  logic signed [16:0] prod [KSZ*KSZ];

  logic        loc_valid;
  logic [8:0]  loc_addr;
  logic        lane_en [16];
  logic [4:0]  lane_tap [16];
  logic [1:0]  loc;

  logic        sr_en, sr_we;
  logic [8:0]  sr_addr;
  logic [255:0] sr_wdata, sr_rdata, acc_out;
  logic        sat_hit;
  logic signed [ACT_W-1:0] pool_act;
  logic [8:0]  act_idx_q;
  logic        act_we;
  logic [ACT_W-1:0] act_rdata;

  logic spi_ker, spi_act, spi_ker_q, spi_act_q;
  assign spi_ker = !spi.addr[15] && spi.addr[14:12] == REG_KER[2:0];
  assign spi_act = !spi.addr[15] && spi.addr[14:12] == REG_ACT[2:0];

  conv_kernel_rf u_ker (
    .clk, .rst, .rd(kr_rd), .rd_k(kr_k), .w(kw),
    .spi_we(spi.we && spi_ker), .spi_re(spi.re && spi_ker),
    .spi_idx(spi.addr[7:0]), .spi_wdata(spi.wdata[7:0]), .spi_rdata(ker_rdata));

  conv_mult_array u_mult (
    .clk, .en(state == S_EVENT && cyc < 2), .pol(ev_pol_q), .ts(ev_ts_q), .w(kw), .prod);

  assign loc = 2'((cyc - 4'd2) >> 1);
  conv_addr_decoder u_dec (
    .k(kidx), .x(ev_x_q), .y(ev_y_q), .loc,
    .valid(loc_valid), .addr(loc_addr), .lane_en, .lane_tap);

  conv_accum u_acc (
    .psum_in(sr_rdata), .prod, .lane_en, .lane_tap, .psum_out(acc_out), .sat_hit);

  conv_psum_sram #(.DEPTH(512), .W(256)) u_sram (
    .clk, .en(sr_en), .we(sr_we), .addr(sr_addr), .wdata(sr_wdata), .rdata(sr_rdata));

  maxpool_quant u_pool (.psums(sr_rdata), .shift(cshift), .act(pool_act));

  act_regfile #(.N(N_IN)) u_act (
    .clk, .rst, .we(act_we), .widx(act_idx_q), .wdata(pool_act), .conv_out,
    .spi_re(spi.re && spi_act), .spi_idx(spi.addr[8:0]), .spi_rdata(act_rdata));

  // the event popped from the FIFO starts kernel 0
  logic start_event;
  assign start_event = fifo_out_valid && !(pool_pending && fifo_empty) &&
                       ((state == S_IDLE) || (state == S_EVENT && kidx == 4'(N_KER-1) && cyc == 4'd9));
  assign fifo_pop = start_event;

  always_comb begin
    kr_rd    = 1'b0;
    kr_k     = '0;
    sr_en    = 1'b0;
    sr_we    = 1'b0;
    sr_addr  = '0;
    sr_wdata = '0;
    act_we   = 1'b0;
    unique case (state)
      S_CLEAR: begin
        sr_en   = 1'b1;
        sr_we   = 1'b1;
        sr_addr = widx[8:0];
      end
      S_EVENT: begin
        if (cyc >= 2 && loc_valid) begin
          sr_en    = 1'b1;
          sr_we    = cyc[0];          // even cycle: read, odd cycle: write
          sr_addr  = loc_addr;
          sr_wdata = acc_out;
        end
        if (cyc == 4'd9 && kidx != 4'(N_KER-1)) begin
          kr_rd = 1'b1;
          kr_k  = kidx + 1'b1;
        end
      end
      S_POOL: begin
        sr_en   = 1'b1;
        sr_we   = pool_phase;         // phase 0: read word, phase 1: clear it
        sr_addr = widx[8:0];
        act_we  = pool_phase;
      end
      default: ;
    endcase
    if (start_event) kr_rd = 1'b1;    // kernel 0 for the new event
  end
  assign act_idx_q = widx[8:0];

  always_ff @(posedge clk) begin
    conv_done <= 1'b0;
    if (rst) begin
      state      <= S_CLEAR;
      widx       <= '0;
      kidx       <= '0;
      cyc        <= '0;
      pool_phase <= 1'b0;
      ev_pol_q   <= 1'b0;
      ev_ts_q    <= '0;
      ev_x_q     <= '0;
      ev_y_q     <= '0;
    end else begin
      if (start_event) begin
        {ev_pol_q, ev_ts_q, ev_x_q, ev_y_q} <= fifo_out;
        kidx  <= '0;
        cyc   <= '0;
        state <= S_EVENT;
      end else begin
        unique case (state)
          S_CLEAR: begin
            widx <= widx + 1'b1;
            if (widx == 10'd511) begin
              widx  <= '0;
              state <= S_IDLE;
            end
          end
          S_IDLE: begin
            if (pool_pending && fifo_empty) begin
              state      <= S_POOL;
              widx       <= '0;
              pool_phase <= 1'b0;
            end
          end
          S_EVENT: begin
            cyc <= cyc + 1'b1;
            if (cyc == 4'd9) begin
              cyc  <= '0;
              kidx <= kidx + 1'b1;
              if (kidx == 4'(N_KER-1)) state <= S_IDLE;
            end
          end
          S_POOL: begin
            pool_phase <= !pool_phase;
            if (pool_phase) begin
              widx <= widx + 1'b1;
              if (widx == 10'(PSUM_WORDS-1)) begin
                state     <= S_IDLE;
                widx      <= '0;
                conv_done <= 1'b1;
              end
            end
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      spi_ker_q <= 1'b0;
      spi_act_q <= 1'b0;
    end else begin
      spi_ker_q <= spi.re && spi_ker;
      spi_act_q <= spi.re && spi_act;
    end
  end
  assign spi_rdata = spi_ker_q ? {8'h00, ker_rdata} :
                     spi_act_q ? {10'h000, act_rdata} : 16'h0000;

  assign sat_event = sr_en && sr_we && state == S_EVENT && sat_hit;
  assign busy = (state != S_IDLE) || !fifo_empty || pool_pending;
endmodule
