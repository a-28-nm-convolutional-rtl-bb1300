// tb_conv_kernel_rf - checks the pseudo-random reset values (recomputed here
// from the LFSR definition), kernel reads and SPI byte writes/reads.
module tb_conv_kernel_rf;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rd = 0, spi_we = 0, spi_re = 0;
  logic [3:0] rd_k = 0;
  logic signed [7:0] w [25];
  logic [7:0] spi_idx = 0, spi_wdata = 0, spi_rdata;
  logic [7:0] model [250];
  conv_kernel_rf dut (.clk, .rst, .rd, .rd_k, .w, .spi_we, .spi_re, .spi_idx, .spi_wdata, .spi_rdata);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic read_kernel(input int k);
    @(negedge clk); rd = 1; rd_k = 4'(k); @(negedge clk); rd = 0;
    for (int t = 0; t < 25; t++) chk(8'(w[t]) == model[k*25+t], $sformatf("k%0d t%0d %h exp %h", k, t, w[t], model[k*25+t]));
  endtask
  initial begin
    logic [15:0] l = 16'hACE1;
    for (int n = 0; n < 250; n++) begin
      for (int s = 0; s < 8; s++) l = {l[14:0], l[15] ^ l[13] ^ l[12] ^ l[10]};
      model[n] = l[7:0];
    end
    repeat (3) @(posedge clk); rst = 0;
    for (int k = 0; k < 10; k++) read_kernel(k);
    // values look random: not all equal, both signs present
    begin int neg = 0; for (int n = 0; n < 250; n++) neg += model[n][7]; chk(neg > 50 && neg < 200, "sign balance"); end
    for (int n = 0; n < 100; n++) begin
      automatic int i = $urandom_range(0, 249); automatic logic [7:0] v = 8'($urandom);
      @(negedge clk); spi_we = 1; spi_idx = 8'(i); spi_wdata = v; @(negedge clk); spi_we = 0; model[i] = v;
      spi_re = 1; spi_idx = 8'($urandom_range(0, 249)); @(negedge clk); spi_re = 0;
      chk(spi_rdata == model[spi_idx], "spi read");
    end
    for (int k = 0; k < 10; k++) read_kernel(k);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
