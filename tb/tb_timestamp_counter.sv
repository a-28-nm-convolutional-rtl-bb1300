// tb_timestamp_counter - checks load at DATA_SYNC, decrement per tick and
// saturation at zero.
module tb_timestamp_counter;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic data_sync = 0, tick = 0, expired;
  logic [7:0] ts;
  timestamp_counter dut (.clk, .rst, .data_sync, .tick, .ts, .expired);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int model;
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    @(negedge clk); chk(ts == 0 && expired, "zero after reset");
    for (int s = 0; s < 3; s++) begin
      data_sync = 1; @(negedge clk); data_sync = 0; model = 255;
      chk(ts == 8'd255 && !expired, "loaded 255");
      for (int c = 0; c < 700; c++) begin
        tick = ($urandom_range(0, 1) == 1);
        @(negedge clk);
        if (tick && model > 0) model--;
        tick = 0;
        chk(int'(ts) == model && expired == (model == 0), $sformatf("ts %0d exp %0d", ts, model));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
