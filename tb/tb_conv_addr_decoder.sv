// tb_conv_addr_decoder - for every pixel and kernel, checks that the four
// locations together touch exactly the 5x5 valid-convolution footprint of the
// event, each output once with tap (y-oy)*5 + (x-ox), at word k*49+ty*7+tx.
module tb_conv_addr_decoder;
  int checks = 0, failures = 0;
  logic [3:0] k; logic [4:0] x, y; logic [1:0] loc;
  logic valid; logic [8:0] addr; logic lane_en [16]; logic [4:0] lane_tap [16];
  conv_addr_decoder dut (.k, .x, .y, .loc, .valid, .addr, .lane_en, .lane_tap);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int hit [28][28];
    for (int kk = 0; kk < 10; kk += 3)
    for (int yy = 0; yy < 32; yy++)
    for (int xx = 0; xx < 32; xx++) begin
      foreach (hit[a, b]) hit[a][b] = -1;
      for (int l = 0; l < 4; l++) begin
        k = 4'(kk); x = 5'(xx); y = 5'(yy); loc = 2'(l); #1;
        if (valid) begin
          automatic int ty = int'(addr - 9'(kk*49)) / 7, tx = int'(addr - 9'(kk*49)) % 7;
          chk(int'(addr) >= kk*49 && int'(addr) < kk*49+49, "addr range");
          for (int ln = 0; ln < 16; ln++) if (lane_en[ln]) begin
            automatic int oy = ty*4 + ln/4, ox = tx*4 + ln%4;
            if (hit[oy][ox] != -1) begin failures++; $display("FAIL: double hit"); end
            hit[oy][ox] = int'(lane_tap[ln]);
          end
        end
      end
      for (int oy = 0; oy < 28; oy++) for (int ox = 0; ox < 28; ox++) begin
        automatic bit inb = (yy - oy) >= 0 && (yy - oy) < 5 && (xx - ox) >= 0 && (xx - ox) < 5;
        if (inb || hit[oy][ox] != -1)
          chk(inb && hit[oy][ox] == (yy-oy)*5 + (xx-ox), $sformatf("x%0d y%0d o(%0d,%0d)", xx, yy, ox, oy));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
