// tb_event_fifo - random push/pop against a queue model; checks full at 32
// entries, ordering, and flush.
module tb_event_fifo;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic flush = 0, in_valid = 0, in_ready, out_valid, out_ready = 0, empty;
  logic [18:0] in_data = 0, out_data;
  logic [18:0] q [$];
  logic ir_s;
  event_fifo dut (.clk, .rst, .flush, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .empty);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      chk(in_ready == (q.size() < 32), $sformatf("in_ready size %0d", q.size()));
      chk(out_valid == (q.size() > 0) && empty == (q.size() == 0), "valid/empty");
      if (q.size() > 0) chk(out_data == q[0], "head data");
      in_valid  = ($urandom_range(0, 99) < (n < 1500 ? 70 : 30));
      out_ready = ($urandom_range(0, 99) < (n < 1500 ? 30 : 70));
      in_data   = 19'($urandom);
      flush     = ($urandom_range(0, 999) == 0);
      ir_s = in_ready;
      @(posedge clk); #1;
      if (flush) q.delete();
      else begin
        if (out_ready && q.size() > 0) void'(q.pop_front());
        if (in_valid && ir_s) q.push_back(in_data);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
