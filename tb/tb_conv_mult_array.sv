// tb_conv_mult_array - random timestamps, polarities and kernels; products
// checked one cycle later against +-ts * w.
module tb_conv_mult_array;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en = 0, pol = 0;
  logic [7:0] ts = 0;
  logic signed [7:0] w [25];
  logic signed [16:0] prod [25];
  conv_mult_array dut (.clk, .en, .pol, .ts, .w, .prod);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 200; n++) begin
      int e;
      @(negedge clk);
      en = 1; pol = 1'($urandom); ts = 8'($urandom);
      if (n < 4) begin ts = 8'd255; end
      foreach (w[t]) w[t] = (n < 2) ? -8'sd128 : 8'($urandom);
      @(negedge clk); en = 0;
      foreach (w[t]) begin
        e = (pol ? int'(ts) : -int'(ts)) * int'(w[t]);
        chk(int'(prod[t]) == e, $sformatf("t%0d %0d exp %0d", t, prod[t], e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
