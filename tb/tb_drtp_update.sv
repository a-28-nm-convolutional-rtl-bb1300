// tb_drtp_update - checks the learning block as the FC core sees it: the
// SPI windows onto B_hid and onto the stored hidden activations, that no
// weight changes without an update strobe or with HID_GRAD low, the sign of
// hidden updates (learning-rate shift large enough that every nonzero input
// moves its weight, so the random numbers do not matter), and the merge of
// the output-layer update into bytes 42..51 of SRAM word 7 with its sign
// given by -(error x previous activation).
module tb_drtp_update;
  import spoon_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [6:0] hid_idx = 0; logic [2:0] word_idx = 0;
  logic upd_hid = 0, hid_grad = 0, upd_out = 0, hact_we = 0, capture = 0, prev_act_nz;
  logic [3:0] label = 0, lr_hid = 4'd12, lr_out = 4'd12;
  logic [383:0] hid_in = 0; logic signed [2:0] hid_act = 0;
  logic [29:0] out_acts = 0; logic [9:0] out_grads = 0;
  logic [511:0] w_hid = 0, w_next; spi_bus_t spi = '0; logic [15:0] spi_rdata;
  logic [9:0] bm [128]; int hm [128];
  drtp_update dut (.clk, .rst, .hid_idx, .word_idx, .upd_hid, .hid_grad, .upd_out, .hact_we, .capture,
                   .prev_act_nz, .label, .hid_in, .hid_act, .out_acts, .out_grads, .w_hid, .lr_hid,
                   .lr_out, .w_next, .spi, .spi_rdata);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic rnd_w();
    for (int b = 0; b < 64; b++) begin
      w_hid[8*b +: 8] = 8'($urandom_range(0, 200) - 100);
      hid_in[6*b +: 6] = 6'($urandom);
    end
  endtask
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); spi = '0; spi.we = 1; spi.addr = {4'(REG_BHID), 12'(i)}; spi.wdata = 16'($urandom);
      bm[i] = spi.wdata[9:0];
    end
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); spi = '0; spi.re = 1; spi.addr = {4'(REG_BHID), 12'(i)};
      @(negedge clk); spi = '0; #1 chk(spi_rdata == 16'(bm[i]), "B_hid over SPI");
    end
    // no strobe / no derivative: unchanged
    for (int n = 0; n < 200; n++) begin
      @(negedge clk); rnd_w(); upd_hid = 1'($urandom); hid_grad = !upd_hid; upd_out = 0;
      word_idx = 3'($urandom); hid_idx = 7'($urandom); label = 4'($urandom_range(0, 9));
      #1 chk(w_next == w_hid, "no update without strobe and derivative");
    end
    // hidden updates: sign of each weight step
    for (int n = 0; n < 300; n++) begin
      @(negedge clk); rnd_w(); upd_hid = 1; hid_grad = 1; upd_out = 0;
      word_idx = 3'($urandom); hid_idx = 7'($urandom); label = 4'($urandom_range(0, 9));
      #1;
      for (int b = 0; b < 64; b++) begin
        automatic int x = int'($signed(hid_in[6*b +: 6]));
        automatic int w = int'($signed(w_hid[8*b +: 8]));
        automatic int d = (x == 0) ? 0 : ((bm[hid_idx][label] ? -x : x) > 0 ? 1 : -1);
        chk(int'($signed(w_next[8*b +: 8])) == w + d, $sformatf("hidden step lane %0d", b));
      end
    end
    @(negedge clk); upd_hid = 0; hid_grad = 0;
    // output updates: two samples of hidden activations, then updates
    foreach (hm[i]) hm[i] = 0;
    for (int smp = 0; smp < 2; smp++) begin
      for (int i = 0; i < 128; i++) begin
        @(negedge clk); hid_idx = 7'(i); hact_we = 1; hid_act = 3'($urandom_range(0, 6) - 3); hm[i] = int'(hid_act);
      end
      @(negedge clk); hact_we = 0; capture = 1; label = 4'($urandom_range(0, 9));
      for (int k = 0; k < 10; k++) begin out_acts[3*k +: 3] = 3'($urandom); out_grads[k] = 1; end
      @(negedge clk); capture = 0;
    end
    for (int i = 0; i < 128; i += 9) begin
      @(negedge clk); spi = '0; spi.re = 1; spi.addr = {4'(REG_HPREV), 12'(i)};
      @(negedge clk); spi = '0; #1 chk(int'($signed(spi_rdata[2:0])) == hm[i], "stored activation over SPI");
    end
    for (int i = 0; i < 128; i++) begin
      automatic int prev;
      @(negedge clk); hid_idx = 7'(i); hact_we = 1; hid_act = 0; prev = hm[i];
      #1 chk(prev_act_nz == (prev != 0), "prev_act_nz");
      @(negedge clk); hact_we = 0; rnd_w(); word_idx = 3'($urandom_range(6, 7)); upd_out = 1;
      #1;
      for (int b = 0; b < 64; b++) begin
        automatic int w = int'($signed(w_hid[8*b +: 8]));
        automatic int d = 0;
        if (word_idx == 7 && b >= 42 && b < 52) begin
          automatic int k = b - 42;
          automatic int e = int'(out_acts[3*k +: 3]) - ((k == int'(label)) ? 7 : 0);
          automatic int p = -(e * prev);
          d = (p > 0) ? 1 : (p < 0) ? -1 : 0;
        end
        chk(int'($signed(w_next[8*b +: 8])) == w + d, $sformatf("output merge i%0d byte %0d", i, b));
      end
      @(negedge clk); upd_out = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
