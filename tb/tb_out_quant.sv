// tb_out_quant - random psums and shifts; checks the 3-bit hardsigmoid
// activations and derivatives.
module tb_out_quant;
  int checks = 0, failures = 0;
  logic signed [15:0] psum [10]; logic [3:0] shift; logic [29:0] acts; logic [9:0] grads;
  out_quant dut (.psum, .shift, .acts, .grads);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 3000; n++) begin
      shift = 4'($urandom_range(0, 6));
      foreach (psum[k]) psum[k] = (n % 2) ? 16'($signed(8'($urandom))) : 16'($urandom);
      #1;
      for (int k = 0; k < 10; k++) begin
        int v, e;
        v = (int'(psum[k]) >>> shift) + 4;
        e = v > 7 ? 7 : v < 0 ? 0 : v;
        chk(int'(acts[3*k +: 3]) == e && grads[k] == (v >= 0 && v <= 7), $sformatf("k%0d psum %0d", k, psum[k]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
