// tb_maxpool_quant - random 4x4 tiles and shifts; checks max, arithmetic
// shift and clipping to signed 6 bits.
module tb_maxpool_quant;
  int checks = 0, failures = 0;
  logic [255:0] psums; logic [3:0] shift; logic signed [5:0] act;
  maxpool_quant dut (.psums, .shift, .act);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 3000; n++) begin
      int m, e;
      for (int l = 0; l < 16; l++) psums[16*l +: 16] = (n % 3 == 0) ? 16'($urandom_range(0, 2000)) - 16'd1000 : 16'($urandom);
      shift = 4'($urandom);
      #1;
      m = -40000;
      for (int l = 0; l < 16; l++) if (int'($signed(psums[16*l +: 16])) > m) m = int'($signed(psums[16*l +: 16]));
      e = m >>> shift;
      if (e > 31) e = 31; if (e < -32) e = -32;
      chk(int'(act) == e, $sformatf("max %0d shift %0d act %0d exp %0d", m, shift, act, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
