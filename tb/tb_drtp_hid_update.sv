// tb_drtp_hid_update - loads random B_hid rows over the SPI port and reads
// them back, then applies random hidden-layer update cycles.  The expected
// 64 new weights come from an independent model: a bit-serial copy of the
// 20-bit LFSR supplies the 12-bit random numbers, the update value is +x or
// -x according to B_hid[i][label], and each weight moves by one step toward
// the sign of the value when |value| << lr exceeds the random number.
module tb_drtp_hid_update;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, moved = 0;
  logic en = 0, step = 0; logic [6:0] hid_idx = 0; logic [3:0] label = 0, lr = 0;
  logic [383:0] hid_in = 0; logic [511:0] w_hid = 0, w_next;
  logic spi_we = 0, spi_re = 0; logic [6:0] spi_idx = 0; logic [9:0] spi_wdata = 0, spi_rdata;
  logic [9:0] bm [128];
  logic [19:0] ls;
  drtp_hid_update dut (.clk, .rst, .en, .step, .hid_idx, .label, .hid_in, .w_hid, .lr, .w_next,
                       .spi_we, .spi_re, .spi_idx, .spi_wdata, .spi_rdata);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    ls = 20'h5A5A5;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); spi_we = 1; spi_idx = 7'(i); spi_wdata = 10'($urandom); bm[i] = spi_wdata;
    end
    @(negedge clk); spi_we = 0;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); spi_re = 1; spi_idx = 7'(i);
      @(negedge clk); spi_re = 0; chk(spi_rdata == bm[i], $sformatf("B row %0d", i));
    end
    for (int n = 0; n < 2000; n++) begin
      automatic logic [19:0] s = ls;
      automatic logic [767:0] r;
      automatic bit bsel;
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0); step = en; hid_idx = 7'($urandom);
      label = ($urandom_range(0, 9) == 0) ? 4'($urandom_range(10, 15)) : 4'($urandom_range(0, 9));
      lr = 4'($urandom_range(0, 9));
      for (int b = 0; b < 64; b++) begin
        hid_in[6*b +: 6] = 6'($urandom);
        w_hid[8*b +: 8] = ($urandom_range(0, 7) == 0) ? (($urandom_range(0, 1) != 0) ? 8'h7f : 8'h80) : 8'($urandom);
      end
      for (int k = 0; k < 768; k++) begin r[k] = s[19] ^ s[16]; s = {s[18:0], r[k]}; end
      bsel = (label < 10) ? bm[hid_idx][label] : 1'b0;
      #1;
      for (int b = 0; b < 64; b++) begin
        automatic int x = int'($signed(hid_in[6*b +: 6]));
        automatic int u = bsel ? ((x == -32) ? 31 : -x) : x;
        automatic int w = int'($signed(w_hid[8*b +: 8]));
        automatic int e = w;
        automatic int m = (u < 0 ? -u : u) << lr;
        if (en && m > int'(r[12*b +: 12])) begin
          if (u > 0 && w < 127) e = w + 1;
          if (u < 0 && w > -128) e = w - 1;
        end
        if (e != w) moved++;
        chk(int'($signed(w_next[8*b +: 8])) == e, $sformatf("n%0d lane %0d w %0d u %0d -> %0d exp %0d", n, b, w, u, $signed(w_next[8*b +: 8]), e));
      end
      if (step) ls = s;
    end
    chk(moved > 1000, "weights moved");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
