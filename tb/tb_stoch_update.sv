// tb_stoch_update - exhaustive-ish check of the stochastic update rule:
// change iff |v|<<lr > rnd, direction sign(v), saturation at -128/127.
module tb_stoch_update;
  int checks = 0, failures = 0;
  logic signed [5:0] v; logic [11:0] rnd; logic [3:0] lr; logic signed [7:0] w, w_next; logic changed;
  stoch_update #(.VW(6)) dut (.v, .rnd, .lr, .w, .w_next, .changed);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 20000; n++) begin
      int m, e;
      v = 6'($urandom); rnd = 12'($urandom); lr = 4'($urandom_range(0, 8));
      w = (n % 10 == 0) ? ((n % 20 == 0) ? 8'sd127 : -8'sd128) : 8'($urandom);
      #1;
      m = (v < 0 ? -int'(v) : int'(v)) << lr;
      e = int'(w);
      if (m > int'(rnd)) begin
        if (v > 0 && e < 127) e++;
        if (v < 0 && e > -128) e--;
      end
      chk(int'(w_next) == e && changed == (e != int'(w)), $sformatf("v %0d rnd %0d lr %0d w %0d -> %0d", v, rnd, lr, w, w_next));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
