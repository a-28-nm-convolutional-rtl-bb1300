// tb_spi_slave - drives 40-bit SPI frames at SCK = CLK/8 from a bit-banged
// master.  Write frames must produce one write strobe with the frame's
// address and data; read frames must produce one read strobe with the
// address, and the 16 bits shifted out on MISO must equal the data the
// (modelled) register bank returned one cycle after the strobe.  Frames with
// an unknown command must produce no strobe.
module tb_spi_slave;
  import spoon_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic sck = 0, mosi = 0, miso;
  spi_bus_t bus; logic [15:0] bus_rdata;
  int n_we = 0, n_re = 0; logic [15:0] last_addr, last_wdata;
  spi_slave dut (.clk, .rst, .sck, .mosi, .miso, .bus, .bus_rdata);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (400000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  // register-bank model: read data one cycle after the strobe
  always_ff @(posedge clk) begin
    bus_rdata <= bus.re ? (bus.addr ^ 16'hA5C3) : 16'h0;
    if (bus.we) begin n_we++; last_addr <= bus.addr; last_wdata <= bus.wdata; end
    if (bus.re) begin n_re++; last_addr <= bus.addr; end
  end
  task automatic frame(input logic [39:0] f, output logic [15:0] got);
    for (int b = 39; b >= 0; b--) begin
      mosi = f[b];
      repeat (4) @(negedge clk);
      sck = 1;
      if (b < 16) got[b] = miso;
      repeat (4) @(negedge clk);
      sck = 0;
    end
    repeat (8) @(negedge clk);
  endtask
  initial begin
    logic [15:0] got;
    repeat (3) @(posedge clk); rst = 0;
    repeat (5) @(negedge clk);
    for (int n = 0; n < 300; n++) begin
      automatic int kind = $urandom_range(0, 4);
      automatic logic [15:0] a = 16'($urandom), d = 16'($urandom);
      automatic int we0 = n_we, re0 = n_re;
      automatic logic [7:0] cmd = (kind < 2) ? 8'h01 : (kind < 4) ? 8'h02 : 8'h7e;
      frame({cmd, a, d}, got);
      if (cmd == 8'h01) begin
        chk(n_we == we0 + 1 && n_re == re0, "one write strobe");
        chk(last_addr == a && last_wdata == d, $sformatf("write addr %h data %h", last_addr, last_wdata));
      end else if (cmd == 8'h02) begin
        chk(n_re == re0 + 1 && n_we == we0, "one read strobe");
        chk(last_addr == a, "read addr");
        chk(got == (a ^ 16'hA5C3), $sformatf("read data %h exp %h", got, a ^ 16'hA5C3));
      end else chk(n_we == we0 && n_re == re0, "no strobe for unknown command");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
