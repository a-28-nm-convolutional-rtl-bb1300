// tb_drtp_out_update - exercises the previous-sample buffers and the output
// weight update.  Hidden activations are written sample after sample; the
// previous activation of a neuron must come back as prev_act_nz / the update
// multiplier.  After `capture` the buffered output activations,
// derivatives and label define the error; the expected new W_out column is
// computed by an independent model (one-hot target 7, error gated by the
// derivative, product clipped to +-15, negated, stochastic step with a
// bit-serial copy of the 17-bit LFSR).
module tb_drtp_out_update;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, moved = 0;
  logic en = 0, step = 0, hact_we = 0, capture = 0, prev_act_nz, spi_re = 0;
  logic [6:0] hid_idx = 0, spi_idx = 0; logic signed [2:0] hid_act = 0;
  logic [29:0] out_acts = 0; logic [9:0] out_grads = 0; logic [3:0] label = 0, lr = 0;
  logic [79:0] w_out = 0, w_next; logic [2:0] spi_rdata;
  int hm [128]; int pa [10]; bit pg [10]; int pl;
  logic [16:0] ls;
  drtp_out_update dut (.clk, .rst, .en, .step, .hid_idx, .hact_we, .hid_act, .prev_act_nz, .capture,
                       .out_acts, .out_grads, .label, .w_out, .lr, .w_next, .spi_re, .spi_idx, .spi_rdata);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    ls = 17'h0ACE5;
    foreach (hm[i]) hm[i] = 0;
    foreach (pa[k]) begin pa[k] = 0; pg[k] = 0; end
    pl = 0;
    for (int smp = 0; smp < 30; smp++) begin
      for (int i = 0; i < 128; i++) begin
        automatic int prev = hm[i];
        automatic logic [16:0] s = ls;
        automatic logic [119:0] r;
        // evaluate neuron i: store new activation, read previous one
        @(negedge clk);
        hid_idx = 7'(i); hact_we = 1; hid_act = 3'($urandom_range(0, 6) - 3);
        if (smp % 3 == 2) hid_act = 0;
        #1 chk(prev_act_nz == (prev != 0), $sformatf("prev_act_nz s%0d i%0d", smp, i));
        hm[i] = int'(hid_act);
        @(negedge clk); hact_we = 0;
        // update cycle for W_out[.][i]
        en = 1'($urandom); step = en; lr = 4'($urandom_range(0, 10));
        label = 4'($urandom_range(0, 9));   // the buffered label must be used
        for (int k = 0; k < 10; k++) w_out[8*k +: 8] = 8'($urandom);
        for (int k = 0; k < 120; k++) begin r[k] = s[16] ^ s[13]; s = {s[15:0], r[k]}; end
        #1;
        for (int k = 0; k < 10; k++) begin
          automatic int e = pg[k] ? pa[k] - ((k == pl) ? 7 : 0) : 0;
          automatic int p = e * prev;
          automatic int u, m, w, x;
          p = p > 15 ? 15 : p < -15 ? -15 : p;
          u = -p; m = (u < 0 ? -u : u) << lr;
          w = int'($signed(w_out[8*k +: 8])); x = w;
          if (en && m > int'(r[12*k +: 12])) begin
            if (u > 0 && w < 127) x = w + 1;
            if (u < 0 && w > -128) x = w - 1;
          end
          if (x != w) moved++;
          chk(int'($signed(w_next[8*k +: 8])) == x, $sformatf("s%0d i%0d k%0d exp %0d got %0d", smp, i, k, x, $signed(w_next[8*k +: 8])));
        end
        if (step) ls = s;
        @(negedge clk); en = 0; step = 0;
      end
      // end of sample: capture outputs and label
      @(negedge clk);
      capture = 1; label = 4'($urandom_range(0, 9)); pl = label;
      for (int k = 0; k < 10; k++) begin
        out_acts[3*k +: 3] = 3'($urandom); out_grads[k] = 1'($urandom);
        pa[k] = int'(out_acts[3*k +: 3]); pg[k] = out_grads[k];
      end
      @(negedge clk); capture = 0;
      // SPI read-back of the stored activations
      for (int i = 0; i < 128; i += 17) begin
        @(negedge clk); spi_re = 1; spi_idx = 7'(i);
        @(negedge clk); spi_re = 0; chk(int'($signed(spi_rdata)) == hm[i], "SPI read of previous activation");
      end
    end
    chk(moved > 500, "weights moved");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
