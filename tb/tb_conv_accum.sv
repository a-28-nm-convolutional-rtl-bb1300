// tb_conv_accum - random psum words, products and lane selections; checks
// saturating 16-bit addition (hardtanh emulation) and the saturation flag.
module tb_conv_accum;
  int checks = 0, failures = 0;
  logic [255:0] psum_in, psum_out; logic signed [16:0] prod [25];
  logic lane_en [16]; logic [4:0] lane_tap [16]; logic sat_hit;
  int nsat = 0;
  conv_accum dut (.psum_in, .prod, .lane_en, .lane_tap, .psum_out, .sat_hit);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 2000; n++) begin
      automatic bit exp_sat = 0;
      psum_in = {8{$urandom}};
      foreach (prod[t]) prod[t] = 17'($signed(16'($urandom)));
      foreach (lane_en[l]) begin lane_en[l] = 1'($urandom); lane_tap[l] = 5'($urandom_range(0, 24)); end
      #1;
      for (int l = 0; l < 16; l++) begin
        automatic int s = int'($signed(psum_in[16*l +: 16]));
        automatic int e = s;
        if (lane_en[l]) begin
          e = s + int'(prod[lane_tap[l]]);
          if (e > 32767) begin e = 32767; exp_sat = 1; end
          if (e < -32768) begin e = -32768; exp_sat = 1; end
        end
        chk(int'($signed(psum_out[16*l +: 16])) == e, $sformatf("lane %0d in %0d en %0d p %0d out %0d exp %0d", l, s, lane_en[l], prod[lane_tap[l]], $signed(psum_out[16*l +: 16]), e));
      end
      chk(sat_hit == exp_sat, "sat flag");
      nsat += exp_sat;
    end
    chk(nsat > 100, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
