// tb_aer_rx - checks the four-phase AER receiver: address decoding into
// polarity/x/y, ACK timing, and back-pressure while the consumer is not ready.
module tb_aer_rx;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req = 0, ack, ev_valid, ev_ready = 0, ev_pol;
  logic [10:0] addr = '0;
  logic [4:0] ev_x, ev_y;
  aer_rx dut (.clk, .rst, .aer_req(req), .aer_addr(addr), .aer_ack(ack), .ev_valid, .ev_ready,
              .ev_pol, .ev_x, .ev_y);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    for (int n = 0; n < 50; n++) begin
      logic [10:0] a; int wait_cyc, got;
      a = 11'($urandom); wait_cyc = $urandom_range(0, 6);
      @(negedge clk); addr = a; req = 1;
      // consumer not ready for wait_cyc cycles: ACK must stay low
      got = 0;
      for (int c = 0; c < 3 + wait_cyc; c++) begin @(negedge clk); if (ack) got = 1; end
      chk(!got, "ack while not ready");
      chk(ev_valid, "event valid");
      chk(ev_pol == a[10] && ev_y == a[9:5] && ev_x == a[4:0], $sformatf("decode %h", a));
      ev_ready = 1; @(negedge clk); ev_ready = 0;
      @(negedge clk); chk(ack, "ack raised");
      chk(!ev_valid, "valid dropped after accept");
      req = 0;
      repeat (4) @(negedge clk); chk(!ack, "ack released");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
