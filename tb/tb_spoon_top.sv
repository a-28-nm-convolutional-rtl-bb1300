// tb_spoon_top - end-to-end test of the whole processor at its default size
// (32x32 retina, 10 kernels 5x5, 490-128-10 network), driven only through
// the chip's pins.
//
// The SPI master (SCK = CLK/8) writes the configuration, reads every kernel
// byte and the B_hid matrix, and reads activations back.  Four samples are
// run with on-chip learning enabled and one without:
//   - events are sent over the four-phase AER input bus, in bursts that
//     fill the event FIFO and stall the bus, interleaved with ticks from the
//     TICK_EXT pin or from the local tick divider;
//   - samples end by timestamp expiry or by INFER_REQ.
// A reference model follows the timestamp counter (it watches the chip's
// tick), first-spike gating and the convolution / max-pool / quantisation,
// and predicts the activations, which are compared with SPI read-backs.
// It then runs the FC network on those activations with the weight SRAM
// contents and predicts the label, which must appear on the AER output bus.
// Each mechanism is counted and a failure is counted for any that never
// happened: back-pressure, first-spike gating, psum saturation, external
// and local ticks, expiry, INFER_REQ, hidden update applied and skipped,
// output update, and weight SRAM changes only while learning.
module tb_spoon_top;
  import spoon_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic sck = 0, mosi = 0, miso;
  logic [10:0] aerin_addr = 0; logic aerin_req = 0, aerin_ack;
  logic [3:0] aerout_addr; logic aerout_req, aerout_ack = 0;
  logic infer_req = 0, data_sync = 0, tick_ext = 0; logic [3:0] label = 0;
  spoon_top dut (.clk, .rst, .sck, .mosi, .miso, .aerin_addr, .aerin_req, .aerin_ack,
                 .aerout_addr, .aerout_req, .aerout_ack, .infer_req, .data_sync, .tick_ext, .label);

  int w [10][25];
  int ps [10][28][28];
  bit seen [32][32];
  bit bm [128][10];
  int ts_m = 0; bit open_m = 0, gate_m = 0;
  int aer_label = -1;
  int n_bp = 0, n_gate = 0, n_sat = 0, n_ext = 0, n_loc = 0, n_exp = 0, n_inf = 0;
  int n_hupd = 0, n_hskip = 0, n_oupd = 0;
  bit ext_phase = 0, loc_on = 0;

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (3000000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int sat16(int v);
    return v > 32767 ? 32767 : v < -32768 ? -32768 : v;
  endfunction

  // reference model of the input side, clocked with the chip
  always @(posedge clk) begin
    if (!rst) begin
      if (dut.u_conv.u_aer.ev_valid && dut.u_conv.ev_ready && open_m) begin
        automatic int x = int'(dut.u_conv.ev_x), y = int'(dut.u_conv.ev_y);
        automatic int sts = dut.u_conv.ev_pol ? ts_m : -ts_m;
        if (gate_m && seen[y][x]) n_gate++;
        else begin
          seen[y][x] = 1;
          for (int k = 0; k < 10; k++)
            for (int oy = y - 4; oy <= y; oy++)
              for (int ox = x - 4; ox <= x; ox++)
                if (oy >= 0 && oy < 28 && ox >= 0 && ox < 28)
                  ps[k][oy][ox] = sat16(ps[k][oy][ox] + sts * w[k][(y - oy) * 5 + (x - ox)]);
        end
      end
      if (dut.u_conv.u_aer.ev_valid && !dut.u_conv.ev_ready) n_bp++;
      if (dut.u_conv.sat_event) n_sat++;
      if (data_sync) begin ts_m = 255; open_m = 1; end
      else begin
        if (open_m && (ts_m == 0 || infer_req)) open_m = 0;
        if (dut.tick) begin
          if (ts_m > 0) ts_m--;
          if (dut.u_tick.local_tick) n_loc++; else n_ext++;
        end
      end
      if (dut.u_fc.state == dut.u_fc.F_RUN && dut.u_fc.cyc == 4'd8 && dut.cfg.train_en) begin
        if (dut.u_fc.q_grad) n_hupd++; else n_hskip++;
        if (dut.prev_act_nz) n_oupd++;
      end
    end
  end

  // AER output receiver
  initial begin
    forever begin
      @(negedge clk);
      if (aerout_req && !aerout_ack) begin aer_label = int'(aerout_addr); repeat (3) @(negedge clk); aerout_ack = 1; end
      else if (!aerout_req && aerout_ack) begin repeat (3) @(negedge clk); aerout_ack = 0; end
    end
  end

  // SPI master on the pins
  task automatic spi_frame(input logic [7:0] cmd, input logic [15:0] a, input logic [15:0] d,
                           output logic [15:0] got);
    automatic logic [39:0] f = {cmd, a, d};
    for (int b = 39; b >= 0; b--) begin
      mosi = f[b];
      repeat (4) @(negedge clk);
      sck = 1;
      if (b < 16) got[b] = miso;
      repeat (4) @(negedge clk);
      sck = 0;
    end
    repeat (8) @(negedge clk);
  endtask
  task automatic spi_wr(input logic [15:0] a, input logic [15:0] d);
    logic [15:0] g; spi_frame(8'h01, a, d, g);
  endtask
  task automatic spi_rd(input logic [15:0] a, output logic [15:0] d);
    spi_frame(8'h02, a, 16'h0, d);
  endtask

  task automatic send(input bit pol, input int x, input int y);
    @(negedge clk); aerin_addr = {pol, 5'(y), 5'(x)}; aerin_req = 1;
    while (!aerin_ack) @(negedge clk);
    aerin_req = 0;
    while (aerin_ack) @(negedge clk);
  endtask
  task automatic ext_tick();
    repeat (2) @(negedge clk); tick_ext = 1; repeat (3) @(negedge clk); tick_ext = 0;
  endtask

  // FC reference: label from the activations and the weight SRAM contents
  function automatic int fc_model(input int act [490]);
    int opsum [10], best;
    foreach (opsum[k]) opsum[k] = 0;
    for (int i = 0; i < 128; i++) begin
      automatic int acc = 0, v, a;
      for (int n = 0; n < 490; n++)
        acc += act[n] * int'($signed(dut.u_fc.u_sram.mem[{7'(i), 3'(n / 64)}][8*(n % 64) +: 8]));
      v = acc >>> 8; a = v > 3 ? 3 : v < -3 ? -3 : v;
      for (int k = 0; k < 10; k++)
        opsum[k] = sat16(opsum[k] + a * int'($signed(dut.u_fc.u_sram.mem[{7'(i), 3'd7}][8*(42 + k) +: 8])));
    end
    best = 0;
    for (int k = 1; k < 10; k++) if (opsum[k] > opsum[best]) best = k;
    return best;
  endfunction

  task automatic run_sample(input int smp, input bit train, input bit use_local, input bit by_infer);
    logic [15:0] d;
    int act [490], exp_label, bad = 0, t0;
    bit changed;
    logic [511:0] snap [8];
    // configuration: gating on except in sample 2, learning as requested
    gate_m = (smp != 2);
    spi_wr({4'(REG_CFG), 12'(CFG_CTRL)}, {13'b0, use_local, train, gate_m});
    spi_rd({4'(REG_CFG), 12'(CFG_CTRL)}, d);
    chk(d[2:0] == {use_local, train, gate_m}, "CTRL read-back");
    foreach (ps[k, y, x]) ps[k][y][x] = 0;
    foreach (seen[y, x]) seen[y][x] = 0;
    label = 4'($urandom_range(0, 9));
    @(negedge clk); data_sync = 1; @(negedge clk); data_sync = 0;
    // a burst that overruns the 32-entry FIFO, then events mixed with ticks
    for (int e = 0; e < 40; e++) send(1'($urandom), $urandom_range(0, 31), $urandom_range(0, 31));
    for (int e = 0; e < 25; e++) begin
      if (!use_local) repeat ($urandom_range(0, 3)) ext_tick();
      else repeat ($urandom_range(0, 60)) @(negedge clk);
      send(1'($urandom), (e % 4 == 0) ? 12 : $urandom_range(0, 31), (e % 4 == 0) ? 20 : $urandom_range(0, 31));
    end
    if (by_infer) begin
      while (!dut.u_conv.fifo_empty || dut.u_conv.state == dut.u_conv.S_EVENT) @(negedge clk);
      @(negedge clk); infer_req = 1; n_inf++; @(negedge clk); infer_req = 0;
    end else begin
      while (ts_m > 0) if (!use_local) ext_tick(); else @(negedge clk);
      n_exp++;
    end
    // CONV done: compare activations with the model
    while (!dut.conv_done) @(negedge clk);
    for (int k = 0; k < 10; k++)
      for (int ty = 0; ty < 7; ty++)
        for (int tx = 0; tx < 7; tx++) begin
          automatic int m = -32768, q;
          for (int l = 0; l < 16; l++) if (ps[k][ty*4 + l/4][tx*4 + l%4] > m) m = ps[k][ty*4 + l/4][tx*4 + l%4];
          q = m >>> 8; act[k*49 + ty*7 + tx] = q > 31 ? 31 : q < -32 ? -32 : q;
        end
    exp_label = fc_model(act);
    for (int i = 0; i < 8; i++) snap[i] = dut.u_fc.u_sram.mem[{7'd5, 3'(i)}];
    @(negedge clk);
    while (dut.fc_busy) @(negedge clk);
    chk(aer_label == exp_label, $sformatf("sample %0d label %0d exp %0d", smp, aer_label, exp_label));
    chk(dut.u_par.last_label == 4'(exp_label), "STATUS label");
    aer_label = -1;
    for (int i = 0; i < 490; i++) begin
      automatic int g = int'($signed(dut.conv_out[6*i +: 6]));
      if (g != act[i]) bad++;
      if (g != act[i] && bad < 4) $display("  sample %0d act %0d: %0d exp %0d", smp, i, g, act[i]);
    end
    chk(bad == 0, $sformatf("sample %0d: %0d activations wrong", smp, bad));
    for (int i = 0; i < 490; i += 37) begin
      spi_rd({4'(REG_ACT), 12'(i)}, d);
      chk(int'($signed(d[5:0])) == act[i], $sformatf("sample %0d act %0d: %0d exp %0d", smp, i, $signed(d[5:0]), act[i]));
    end
    changed = 0;
    for (int i = 0; i < 8; i++) if (snap[i] != dut.u_fc.u_sram.mem[{7'd5, 3'(i)}]) changed = 1;
    if (!train) chk(!changed, "no weight change without learning");
  endtask

  initial begin
    logic [15:0] d;
    repeat (5) @(posedge clk); rst = 0;
    while (dut.u_conv.busy || dut.fc_busy) @(negedge clk);
    // configuration registers: reset values, local tick period
    spi_rd({4'(REG_CFG), 12'(CFG_CSHIFT)}, d); chk(d == 16'd8, "CSHIFT reset value");
    spi_rd({4'(REG_CFG), 12'(CFG_LRO)}, d);    chk(d == 16'd6, "LR_OUT reset value");
    spi_wr({4'(REG_CFG), 12'(CFG_TICK)}, 16'd19);
    spi_rd({4'(REG_CFG), 12'(CFG_TICK)}, d);   chk(d == 16'd19, "tick period");
    // kernel 0 overwritten with large weights (saturation), then all read back
    for (int t = 0; t < 25; t++) spi_wr({4'(REG_KER), 12'(t)}, 16'(8'(t % 2 ? 127 : 120)));
    for (int n = 0; n < 250; n++) begin
      spi_rd({4'(REG_KER), 12'(n)}, d);
      w[n / 25][n % 25] = int'($signed(d[7:0]));
    end
    chk(w[0][3] == 127 && w[0][4] == 120, "kernel write through SPI");
    for (int i = 0; i < 128; i += 31) begin
      spi_rd({4'(REG_BHID), 12'(i)}, d); chk(d[15:10] == 0, "B_hid read");
    end
    run_sample(0, 1, 0, 0);
    run_sample(1, 1, 1, 1);
    run_sample(2, 1, 0, 1);
    run_sample(3, 1, 1, 0);
    run_sample(4, 0, 0, 1);
    $display("back-pressure %0d, gated %0d, saturations %0d, ext ticks %0d, local ticks %0d, expiries %0d, INFER_REQ %0d",
             n_bp, n_gate, n_sat, n_ext, n_loc, n_exp, n_inf);
    $display("hidden updates %0d, hidden skipped %0d, output updates %0d", n_hupd, n_hskip, n_oupd);
    chk(n_bp > 0, "AER back-pressure happened");
    chk(n_gate > 0, "first-spike gating happened");
    chk(n_sat > 0, "psum saturation happened");
    chk(n_ext > 0, "external tick happened");
    chk(n_loc > 0, "local tick happened");
    chk(n_exp > 0, "timestamp expiry happened");
    chk(n_inf > 0, "INFER_REQ happened");
    chk(n_hupd > 0, "hidden update applied");
    chk(n_hskip > 0, "hidden update skipped (HID_GRAD=0)");
    chk(n_oupd > 0, "output update happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
