// tb_tick_gen - checks the local tick period and the edge-detected external
// tick input.
module tb_tick_gen;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic tick_ext = 0, local_en = 0, tick;
  logic [15:0] period = 0;
  tick_gen dut (.clk, .rst, .tick_ext, .local_en, .period, .tick);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int cnt;
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    // external ticks: one tick per rising edge, however long the pulse
    for (int n = 0; n < 10; n++) begin
      @(negedge clk); tick_ext = 1;
      cnt = 0; repeat (8) begin @(negedge clk); cnt += tick; end
      tick_ext = 0; repeat (5) begin @(negedge clk); cnt += tick; end
      chk(cnt == 1, $sformatf("ext tick count %0d", cnt));
    end
    // local ticks
    for (int p = 0; p < 6; p++) begin
      int first, second;
      @(negedge clk); period = 16'(p * 3 + 1); local_en = 1;
      while (!tick) @(negedge clk);
      first = 0; @(negedge clk);
      while (!tick) begin @(negedge clk); first++; end
      chk(first + 1 == int'(period) + 1, $sformatf("period %0d measured %0d", period, first + 1));
      local_en = 0; @(negedge clk);
      cnt = 0; repeat (40) begin @(negedge clk); cnt += tick; end
      chk(cnt == 0, "no tick when disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
