// tb_out_layer - sequences of W_out * y accumulations with clears; checks
// the ten saturating 16-bit psums.
module tb_out_layer;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clr = 0, en = 0; logic [79:0] w_out = 0; logic signed [2:0] y = 0;
  logic signed [15:0] psum [10]; int model [10];
  out_layer dut (.clk, .rst, .clr, .en, .w_out, .y, .psum);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    for (int s = 0; s < 6; s++) begin
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      foreach (model[k]) model[k] = 0;
      for (int i = 0; i < 128; i++) begin
        w_out = {3{$urandom}}; y = 3'($urandom); en = 1'($urandom);
        if (s >= 4) begin w_out = (s == 4) ? {10{8'h7f}} : {10{8'h80}}; y = 3'sd3; en = 1; end
        @(negedge clk);
        if (en) for (int k = 0; k < 10; k++) begin
          model[k] += int'($signed(w_out[8*k +: 8])) * int'(y);
          if (model[k] > 32767) model[k] = 32767; if (model[k] < -32768) model[k] = -32768;
        end
        for (int k = 0; k < 10; k++) chk(int'(psum[k]) == model[k], $sformatf("psum %0d", k));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
