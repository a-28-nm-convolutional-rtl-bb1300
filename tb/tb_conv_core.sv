// tb_conv_core - end-to-end test of the convolution core.
//
// Loads random kernels over the SPI bus, then runs several samples.  Each
// sample opens with DATA_SYNC; random retina events are sent over the
// four-phase AER bus, interleaved with TICKs, and the sample ends either by
// timestamp expiry (255 ticks) or by INFER_REQ.  An independent reference
// model applies first-spike gating, time-stamps each accepted event, performs
// the 5x5 convolution with per-addition 16-bit saturation, max-pools the
// 28x28 maps 4x4 and quantises to 6 bits; the 490 activations on CONV_OUT
// (and a sample of them read back over SPI) must match.  Events sent outside
// a sample must be dropped.  Also checked: 100 cycles per event with a
// backlog, FIFO back-pressure on the AER bus, saturation flagged, and that
// each sample starts from cleared psums.
module tb_conv_core;
  import spoon_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic aer_req = 0, aer_ack; logic [10:0] aer_addr = 0;
  logic tick = 0, data_sync = 0, infer_req = 0, gate_en = 0; logic [3:0] cshift = 8;
  spi_bus_t spi = '0; logic [15:0] spi_rdata;
  logic [N_IN*ACT_W-1:0] conv_out; logic conv_done, busy, sat_event;
  int w [10][25];
  int ps [10][28][28];
  bit seen [32][32];
  int ts_m, cycle = 0, last_start = -1, n_100 = 0, n_short = 0, n_sat = 0, n_bp = 0, n_gate = 0, n_done = 0;
  conv_core dut (.clk, .rst, .aer_req, .aer_addr, .aer_ack, .tick, .data_sync, .infer_req, .gate_en,
                 .cshift, .spi, .spi_rdata, .conv_out, .conv_done, .busy, .sat_event);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (400000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) begin
    cycle++;
    if (sat_event) n_sat++;
    if (conv_done && !rst) n_done++;
    if (dut.start_event) begin
      if (last_start >= 0 && cycle - last_start < 100) n_short++;
      if (last_start >= 0 && cycle - last_start == 100) n_100++;
      last_start = cycle;
    end
  end
  function automatic int sat16(int v);
    return v > 32767 ? 32767 : v < -32768 ? -32768 : v;
  endfunction
  task automatic send(input bit pol, input int x, input int y, input bit open);
    automatic int t0 = cycle;
    @(negedge clk); aer_addr = {pol, 5'(y), 5'(x)}; aer_req = 1;
    while (!aer_ack) @(negedge clk);
    if (cycle - t0 > 20) n_bp++;
    aer_req = 0;
    while (aer_ack) @(negedge clk);
    if (open) begin
      if (gate_en && seen[y][x]) n_gate++;
      else begin
        automatic int sts = pol ? ts_m : -ts_m;
        seen[y][x] = 1;
        for (int k = 0; k < 10; k++)
          for (int oy = y - 4; oy <= y; oy++)
            for (int ox = x - 4; ox <= x; ox++)
              if (oy >= 0 && oy < 28 && ox >= 0 && ox < 28)
                ps[k][oy][ox] = sat16(ps[k][oy][ox] + sts * w[k][(y - oy) * 5 + (x - ox)]);
      end
    end
  endtask
  task automatic do_tick();
    @(negedge clk); tick = 1; @(negedge clk); tick = 0;
    if (ts_m > 0) ts_m--;
  endtask
  task automatic check_acts(input int smp);
    int bad = 0;
    for (int k = 0; k < 10; k++)
      for (int ty = 0; ty < 7; ty++)
        for (int tx = 0; tx < 7; tx++) begin
          automatic int m = -32768, q;
          for (int l = 0; l < 16; l++) if (ps[k][ty*4 + l/4][tx*4 + l%4] > m) m = ps[k][ty*4 + l/4][tx*4 + l%4];
          q = m >>> cshift; q = q > 31 ? 31 : q < -32 ? -32 : q;
          if (int'($signed(conv_out[6*(k*49 + ty*7 + tx) +: 6])) != q) begin
            bad++;
            if (bad < 5) $display("  s%0d k%0d ty%0d tx%0d got %0d exp %0d", smp, k, ty, tx, $signed(conv_out[6*(k*49 + ty*7 + tx) +: 6]), q);
          end
          checks++;
        end
    failures += bad;
    for (int i = 0; i < 490; i += 7) begin
      @(negedge clk); spi = '0; spi.re = 1; spi.addr = {4'(REG_ACT), 12'(i)};
      @(negedge clk); spi = '0; #1 chk(spi_rdata[5:0] == conv_out[6*i +: 6], "SPI activation read");
    end
  endtask
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    for (int s = 0; s < 4; s++) begin
      // kernels: large values in sample 0 (saturation), small otherwise
      for (int n = 0; n < 250; n++) begin
        @(negedge clk); spi = '0; spi.we = 1; spi.addr = {4'(REG_KER), 12'(n)};
        spi.wdata = (s == 0) ? 16'($urandom) : 16'($urandom_range(0, 16) - 8);
        w[n / 25][n % 25] = int'($signed(spi.wdata[7:0]));
      end
      @(negedge clk); spi = '0;
      for (int n = 0; n < 250; n += 13) begin
        @(negedge clk); spi.re = 1; spi.addr = {4'(REG_KER), 12'(n)};
        @(negedge clk); spi = '0; #1 chk(int'($signed(spi_rdata[7:0])) == w[n / 25][n % 25], "SPI kernel read");
      end
      while (busy) @(negedge clk);
      // events outside a sample are dropped
      for (int e = 0; e < 3; e++) send(1'($urandom), $urandom_range(0, 31), $urandom_range(0, 31), 0);
      gate_en = (s != 2); cshift = (s == 0) ? 4'd8 : 4'($urandom_range(3, 6));
      foreach (ps[k, y, x]) ps[k][y][x] = 0;
      foreach (seen[y, x]) seen[y][x] = 0;
      @(negedge clk); data_sync = 1; @(negedge clk); data_sync = 0; ts_m = 255;
      // burst to fill the FIFO (back-pressure), then events mixed with ticks
      for (int e = 0; e < 45; e++) send(1'($urandom), $urandom_range(0, 31), $urandom_range(0, 31), 1);
      for (int e = 0; e < 30; e++) begin
        repeat ($urandom_range(0, 4)) do_tick();
        // repeat a pixel now and then to exercise gating
        if (e % 5 == 0) send(1'($urandom), 7, 9, 1);
        else send(1'($urandom), $urandom_range(0, 31), $urandom_range(0, 31), 1);
      end
      if (s % 2 == 0) begin
        // let the timestamp run out; all queued events still count
        while (ts_m > 0) do_tick();
      end else begin
        // INFER_REQ: wait for the backlog so that all events are processed
        while (!dut.fifo_empty || dut.state == dut.S_EVENT) @(negedge clk);
        @(negedge clk); infer_req = 1; @(negedge clk); infer_req = 0;
      end
      begin
        automatic int t0 = n_done;
        while (n_done == t0) @(negedge clk);
      end
      check_acts(s);
    end
    $display("back-pressure %0d, gated %0d, saturations %0d, 100-cycle events %0d", n_bp, n_gate, n_sat, n_100);
    chk(n_bp > 0, "back-pressure seen");
    chk(n_gate > 0, "first-spike gating seen");
    chk(n_sat > 0, "psum saturation seen");
    chk(n_100 > 20 && n_short == 0, "one event per 100 cycles");
    chk(n_done == 4, $sformatf("one CONV_DONE per sample (%0d)", n_done));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
