// tb_fc_weight_sram - random full-word and single-slice masked writes and
// reads against a model.
module tb_fc_weight_sram;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en = 0, we = 0; logic [31:0] wmask = '1; logic [9:0] addr = 0;
  logic [511:0] wdata = 0, rdata; logic [511:0] model [1024];
  fc_weight_sram dut (.clk, .en, .we, .wmask, .addr, .wdata, .rdata);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); en = 1; we = 1; wmask = '1; addr = 10'(a); wdata = {16{$urandom}}; model[a] = wdata;
    end
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk); en = 1; we = 1'($urandom); addr = 10'($urandom_range(0, 63));
      wmask = ($urandom_range(0, 1)) ? '1 : 32'(1) << $urandom_range(0, 31);
      wdata = {16{$urandom}};
      @(posedge clk); #1;
      if (we) begin for (int s = 0; s < 32; s++) if (wmask[s]) model[addr][16*s +: 16] = wdata[16*s +: 16]; end
      else chk(rdata == model[addr], $sformatf("read %0d", addr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
