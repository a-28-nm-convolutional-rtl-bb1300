// tb_aer_tx - checks the four-phase AER transmitter against a responding
// receiver model: address stable while REQ is high, REQ falls after ACK,
// busy until the handshake completes.
module tb_aer_tx;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic send = 0, busy, req, ack = 0;
  logic [3:0] label = 0, addr;
  aer_tx dut (.clk, .rst, .send, .label, .busy, .aer_req(req), .aer_addr(addr), .aer_ack(ack));
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    for (int n = 0; n < 40; n++) begin
      logic [3:0] l; int t;
      l = 4'($urandom_range(0, 9));
      @(negedge clk); label = l; send = 1; @(negedge clk); send = 0; label = ~l;
      chk(busy, "busy after send");
      t = 0; while (!req && t < 10) begin @(negedge clk); t++; end
      chk(req, "req raised");
      chk(addr == l, $sformatf("addr %0d exp %0d", addr, l));
      repeat ($urandom_range(0, 5)) begin @(negedge clk); chk(req && addr == l, "req held"); end
      ack = 1;
      t = 0; while (req && t < 10) begin @(negedge clk); t++; end
      chk(!req, "req released after ack");
      chk(busy, "busy until ack low");
      ack = 0;
      t = 0; while (busy && t < 10) begin @(negedge clk); t++; end
      chk(!busy, "idle after handshake");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
