// tb_conv_psum_sram - random reads/writes against an array model, including
// read-data hold across write cycles.
module tb_conv_psum_sram;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en = 0, we = 0; logic [8:0] addr = 0; logic [255:0] wdata = 0, rdata, last;
  logic [255:0] model [512];
  conv_psum_sram dut (.clk, .en, .we, .addr, .wdata, .rdata);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int a = 0; a < 512; a++) begin
      @(negedge clk); en = 1; we = 1; addr = 9'(a);
      wdata = {8{$urandom}}; model[a] = wdata;
    end
    @(negedge clk); en = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      en = 1; we = 1'($urandom); addr = 9'($urandom); wdata = {8{$urandom}};
      @(posedge clk); #1;
      if (we) begin model[addr] = wdata; chk(rdata == last, "read data held during write"); end
      else begin chk(rdata == model[addr], $sformatf("read %0d", addr)); last = rdata; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
