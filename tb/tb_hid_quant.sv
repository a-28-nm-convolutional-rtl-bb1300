// tb_hid_quant - sweeps accumulator values and shifts; checks the 3-bit
// hardtanh value and its binary derivative.
module tb_hid_quant;
  int checks = 0, failures = 0;
  logic signed [22:0] acc; logic [3:0] shift; logic signed [2:0] act; logic grad;
  hid_quant dut (.acc, .shift, .act, .grad);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 5000; n++) begin
      int v, e; bit g;
      shift = 4'($urandom);
      acc = (n % 2) ? 23'($signed(12'($urandom))) : 23'($urandom);
      #1;
      v = int'(acc) >>> shift;
      g = (v >= -3 && v <= 3);
      e = v > 3 ? 3 : v < -3 ? -3 : v;
      chk(int'(act) == e && grad == g, $sformatf("acc %0d sh %0d act %0d grad %0d", acc, shift, act, grad));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
