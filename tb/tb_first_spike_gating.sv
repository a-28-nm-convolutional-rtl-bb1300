// tb_first_spike_gating - random event stream against a reference set of
// seen pixels; checks enable and clear.
module tb_first_spike_gating;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic enable = 1, clear = 0, mark = 0, pass;
  logic [9:0] pix = 0;
  bit seen [1024];
  first_spike_gating dut (.clk, .rst, .enable, .clear, .pix, .mark, .pass);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    for (int s = 0; s < 3; s++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      foreach (seen[i]) seen[i] = 0;
      for (int n = 0; n < 600; n++) begin
        pix = 10'($urandom_range(0, 63)); enable = (s != 1);
        #1;
        chk(pass == (!enable || !seen[pix]), $sformatf("pix %0d pass %0d", pix, pass));
        mark = pass;
        @(negedge clk); if (mark) seen[pix] = 1; mark = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
