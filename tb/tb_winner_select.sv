// tb_winner_select - random psums with forced ties; checks arg-max with
// lowest-index tie break.
module tb_winner_select;
  int checks = 0, failures = 0;
  logic signed [15:0] psum [10]; logic [3:0] label;
  winner_select dut (.psum, .label);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 5000; n++) begin
      int best;
      foreach (psum[k]) psum[k] = (n % 2) ? 16'($signed(3'($urandom))) : 16'($urandom);
      #1;
      best = 0;
      for (int k = 1; k < 10; k++) if (psum[k] > psum[best]) best = k;
      chk(int'(label) == best, $sformatf("label %0d exp %0d", label, best));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
