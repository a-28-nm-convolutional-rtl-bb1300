// tb_fc_core - the FC core together with the DRTP update block.
//
// Random weights are loaded into the weight SRAM through 16-bit SPI slice
// writes and the B_hid matrix is read back over SPI.  For random CONV_OUT
// vectors, an independent model computes the 128 hidden sums, the 3-bit
// hardtanh activations, the 10 saturating output psums, the hardsigmoid
// outputs and the winner; the label sent on the AER output bus must match.
// Three samples are run: two with learning (learning-rate shifts large
// enough that every nonzero update value moves its weight by exactly one
// step, so the expected SRAM contents are known), one without.  Checked
// after each: every hidden weight (moved by sign(+-x) on neurons with
// HID_GRAD=1, else unchanged), every output weight (moved in sample 2 by
// sign of -(error x previous activation) of sample 1), and the cycle count
// 1 + 128*8 + 1 plus 8 cycles per hidden update and 1 per output-only
// update.
module tb_fc_core;
  import spoon_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, train_en = 0; logic [3:0] hshift = 8, oshift = 6, label = 0;
  logic [N_IN*ACT_W-1:0] conv_out = 0;
  logic [6:0] hid_idx; logic [2:0] word_idx; logic [BATCH*ACT_W-1:0] hid_in;
  logic signed [2:0] hid_act; logic hid_grad, upd_hid, upd_out, hact_we, capture, prev_act_nz;
  logic [BATCH*W_W-1:0] w_hid, w_next; logic [29:0] out_acts; logic [9:0] out_grads;
  logic aerout_req, aerout_ack = 0; logic [3:0] aerout_addr, inferred; logic done, busy;
  spi_bus_t spi = '0; logic [15:0] fc_rdata, drtp_rdata;
  fc_core dut (.clk, .rst, .start, .conv_out, .train_en, .hshift, .oshift, .hid_idx, .word_idx,
               .hid_in, .hid_act, .hid_grad, .w_hid, .upd_hid, .upd_out, .hact_we, .capture,
               .out_acts, .out_grads, .prev_act_nz, .w_next, .aerout_req, .aerout_addr, .aerout_ack,
               .inferred, .done, .busy, .spi, .spi_rdata(fc_rdata));
  drtp_update u_drtp (.clk, .rst, .hid_idx, .word_idx, .upd_hid, .hid_grad, .upd_out, .hact_we, .capture,
                      .prev_act_nz, .label, .hid_in, .hid_act, .out_acts, .out_grads, .w_hid,
                      .lr_hid(4'd12), .lr_out(4'd12), .w_next, .spi, .spi_rdata(drtp_rdata));
  int wh [128][490]; int wo [10][128]; bit bm [128][10];
  int hprev [128]; int pacts [10]; bit pgrads [10]; int plabel;
  int aer_label = -1;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  // AER output receiver
  initial begin
    forever begin
      @(negedge clk);
      if (aerout_req && !aerout_ack) begin aer_label = int'(aerout_addr); repeat (2) @(negedge clk); aerout_ack = 1; end
      else if (!aerout_req && aerout_ack) begin repeat (2) @(negedge clk); aerout_ack = 0; end
    end
  end
  function automatic int byte_of(int i, int n);   // hidden weight i,n -> SRAM byte
    return int'($signed(dut.u_sram.mem[{7'(i), 3'(n / 64)}][8*(n % 64) +: 8]));
  endfunction
  task automatic run_sample(input int smp, input bit train);
    int acc, a, g, v, opsum [10], oact [10], best, cyc0, ncyc, extra;
    int hact [128]; bit hgrad [128];
    bit ograd [10];
    for (int n = 0; n < 490; n++) conv_out[6*n +: 6] = 6'($urandom);
    train_en = train; label = 4'($urandom_range(0, 9));
    foreach (opsum[k]) opsum[k] = 0;
    extra = 0;
    for (int i = 0; i < 128; i++) begin
      acc = 0;
      for (int n = 0; n < 490; n++) acc += int'($signed(conv_out[6*n +: 6])) * wh[i][n];
      v = acc >>> hshift;
      g = (v >= -3 && v <= 3); a = v > 3 ? 3 : v < -3 ? -3 : v;
      hact[i] = a; hgrad[i] = g;
      for (int k = 0; k < 10; k++) begin
        opsum[k] += wo[k][i] * a;
        opsum[k] = opsum[k] > 32767 ? 32767 : opsum[k] < -32768 ? -32768 : opsum[k];
      end
      if (train && g) extra += 8; else if (train && hprev[i] != 0) extra += 1;
    end
    best = 0;
    for (int k = 0; k < 10; k++) begin
      v = (opsum[k] >>> oshift) + 4;
      ograd[k] = (v >= 0 && v <= 7); oact[k] = v > 7 ? 7 : v < 0 ? 0 : v;
      if (opsum[k] > opsum[best]) best = k;
    end
    // expected weight changes
    if (train) for (int i = 0; i < 128; i++) begin
      if (hgrad[i]) for (int n = 0; n < 490; n++) begin
        automatic int x = int'($signed(conv_out[6*n +: 6]));
        automatic int u = bm[i][label] ? -x : x;
        wh[i][n] += (u > 0) ? 1 : (u < 0) ? -1 : 0;
      end
      if (hprev[i] != 0) for (int k = 0; k < 10; k++) begin
        automatic int e = pgrads[k] ? pacts[k] - ((k == plabel) ? 7 : 0) : 0;
        automatic int p = -(e * hprev[i]);
        wo[k][i] += (p > 0) ? 1 : (p < 0) ? -1 : 0;
      end
    end
    // run
    aer_label = -1;
    @(negedge clk); start = 1; cyc0 = 0;
    @(negedge clk); start = 0;
    ncyc = 1;
    while (!done) begin @(negedge clk); ncyc++; end
    // one edge samples START, then 1 + 128*8 + 1 cycles plus the update cycles
    chk(ncyc == 1 + 1 + 128*8 + 1 + extra, $sformatf("sample %0d cycles %0d exp %0d", smp, ncyc, 2 + 128*8 + 1 + extra));
    chk(int'(inferred) == best, $sformatf("sample %0d inferred %0d exp %0d", smp, inferred, best));
    while (busy) @(negedge clk);
    chk(aer_label == best, "label on AER output");
    for (int i = 0; i < 128; i++) begin
      automatic int bad = 0;
      for (int n = 0; n < 490; n++) if (byte_of(i, n) != wh[i][n]) bad++;
      for (int k = 0; k < 10; k++)
        if (int'($signed(dut.u_sram.mem[{7'(i), 3'd7}][8*(42 + k) +: 8])) != wo[k][i]) bad++;
      chk(bad == 0, $sformatf("sample %0d neuron %0d: %0d weights wrong", smp, i, bad));
    end
    if (train) begin
      for (int i = 0; i < 128; i++) hprev[i] = hact[i];
      for (int k = 0; k < 10; k++) begin pacts[k] = oact[k]; pgrads[k] = ograd[k]; end
      plabel = label;
    end
  endtask
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    foreach (hprev[i]) hprev[i] = 0;
    while (busy) @(negedge clk);
    // weights through SPI slice writes (two bytes per slice)
    for (int i = 0; i < 128; i++)
      for (int wd = 0; wd < 8; wd++)
        for (int s = 0; s < 32; s++) begin
          automatic logic [7:0] b0, b1;
          for (int h = 0; h < 2; h++) begin
            automatic int by = 2*s + h, n = wd*64 + by, v = 0;
            if (n < 490) begin v = $urandom_range(0, 8) - 4; wh[i][n] = v; end
            else if (wd == 7 && by >= 42 && by < 52) begin v = $urandom_range(0, 40) - 20; wo[by - 42][i] = v; end
            if (h == 0) b0 = 8'(v); else b1 = 8'(v);
          end
          @(negedge clk); spi = '0; spi.we = 1; spi.addr = {1'b1, 7'(i), 3'(wd), 5'(s)}; spi.wdata = {b1, b0};
        end
    @(negedge clk); spi = '0;
    for (int n = 0; n < 40; n++) begin
      automatic int i = $urandom_range(0, 127), wd = $urandom_range(0, 7), s = $urandom_range(0, 31);
      @(negedge clk); spi.re = 1; spi.addr = {1'b1, 7'(i), 3'(wd), 5'(s)};
      @(negedge clk); spi = '0;
      #1 chk(fc_rdata == dut.u_sram.mem[{7'(i), 3'(wd)}][16*s +: 16], "SPI slice read");
    end
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); spi.re = 1; spi.addr = {4'(REG_BHID), 12'(i)};
      @(negedge clk); spi = '0;
      #1 for (int k = 0; k < 10; k++) bm[i][k] = drtp_rdata[k];
    end
    run_sample(0, 1);
    run_sample(1, 1);
    run_sample(2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
