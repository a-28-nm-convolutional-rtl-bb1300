// tb_act_regfile - random writes; checks the packed CONV_OUT vector and the
// SPI read port.
module tb_act_regfile;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0, spi_re = 0; logic [8:0] widx = 0, spi_idx = 0; logic [5:0] wdata = 0, spi_rdata;
  logic [2939:0] conv_out; logic [5:0] model [490];
  act_regfile dut (.clk, .rst, .we, .widx, .wdata, .conv_out, .spi_re, .spi_idx, .spi_rdata);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    foreach (model[i]) model[i] = 0;
    repeat (3) @(posedge clk); rst = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk); we = 1; widx = 9'($urandom_range(0, 489)); wdata = 6'($urandom);
      spi_re = 1; spi_idx = 9'($urandom_range(0, 489));
      @(posedge clk); #1; model[widx] = wdata; we = 0; spi_re = 0;
      if (n % 50 == 0) for (int i = 0; i < 490; i++) chk(conv_out[6*i +: 6] == model[i], $sformatf("entry %0d", i));
    end
    for (int i = 0; i < 490; i += 7) begin
      @(negedge clk); spi_re = 1; spi_idx = 9'(i); @(negedge clk); spi_re = 0;
      chk(spi_rdata == model[i], "spi read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
