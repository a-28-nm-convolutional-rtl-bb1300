// tb_lfsr_unfolded - compares the unfolded LFSR (20-bit, 768 bits per step)
// with a bit-serial reference LFSR, and checks that 12-bit numbers drawn from
// it are roughly uniform.
module tb_lfsr_unfolded;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic step = 0; logic [767:0] rnd;
  lfsr_unfolded #(.W(20), .TAP(17), .N(768), .SEED(20'h5A5A5)) dut (.clk, .rst, .step, .rnd);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [19:0] s; int low = 0, total = 0;
    s = 20'h5A5A5;
    repeat (3) @(posedge clk); rst = 0;
    for (int n = 0; n < 200; n++) begin
      logic [19:0] s0;
      @(negedge clk);
      s0 = s;
      for (int b = 0; b < 768; b++) begin
        logic f; f = s[19] ^ s[16]; s = {s[18:0], f};
        if (rnd[b] != f) begin chk(0, $sformatf("step %0d bit %0d", n, b)); break; end
      end
      checks++;
      for (int u = 0; u < 64; u++) begin total++; if (rnd[12*u +: 12] < 12'd2048) low++; end
      step = ($urandom_range(0, 3) != 0);
      if (!step) s = s0;  // no step: the state must hold
      @(negedge clk);
      step = 0;
    end
    chk(low > total * 45 / 100 && low < total * 55 / 100, $sformatf("uniformity %0d/%0d", low, total));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
