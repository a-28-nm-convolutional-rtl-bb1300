// tb_fc_mac64 - random inputs/weights including extremes; checks the
// 64-term signed dot product plus accumulator.
module tb_fc_mac64;
  int checks = 0, failures = 0;
  logic [383:0] x; logic [511:0] w; logic signed [22:0] acc_in, acc_out;
  fc_mac64 dut (.x, .w, .acc_in, .acc_out);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 3000; n++) begin
      int e;
      for (int b = 0; b < 64; b++) begin
        x[6*b +: 6] = (n < 5) ? 6'h20 : 6'($urandom);
        w[8*b +: 8] = (n < 5) ? 8'h80 : 8'($urandom);
      end
      acc_in = 23'($signed(20'($urandom)));
      #1;
      e = int'(acc_in);
      for (int b = 0; b < 64; b++) e += int'($signed(x[6*b +: 6])) * int'($signed(w[8*b +: 8]));
      chk(int'(acc_out) == e, $sformatf("acc %0d exp %0d", acc_out, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
