// tb_learn_patterns - on-chip learning workload at the chip's full size.
//
// A small stand-in for the handwritten-digit task the chip was evaluated
// on: four classes of 32x32 event patterns (vertical bar, horizontal bar,
// diagonal, square outline), each sample randomly shifted by up to two
// pixels with 20 % of its pixels dropped.  Events are sent in random order
// with external ticks in between (time-to-first-spike order), first-spike
// gating is on, and each sample ends with INFER_REQ.  The chip starts from
// zero FC weights and learns on chip with DRTP, the label on the LABEL pin.
// The label sent on the AER output before each sample's update is scored;
// the test fails unless the last epochs classify clearly above chance.
module tb_learn_patterns;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic sck = 0, mosi = 0, miso;
  logic [10:0] aerin_addr = 0; logic aerin_req = 0, aerin_ack;
  logic [3:0] aerout_addr; logic aerout_req, aerout_ack = 0;
  logic infer_req = 0, data_sync = 0, tick_ext = 0; logic [3:0] label = 0;
  int aer_label = -1;
  localparam int EPOCHS = 12, PER_CLASS = 3, NCLS = 4;
  spoon_top dut (.clk, .rst, .sck, .mosi, .miso, .aerin_addr, .aerin_req, .aerin_ack,
                 .aerout_addr, .aerout_req, .aerout_ack, .infer_req, .data_sync, .tick_ext, .label);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (20000000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    forever begin
      @(negedge clk);
      if (aerout_req && !aerout_ack) begin aer_label = int'(aerout_addr); repeat (3) @(negedge clk); aerout_ack = 1; end
      else if (!aerout_req && aerout_ack) begin repeat (3) @(negedge clk); aerout_ack = 0; end
    end
  end
  // SPI master on the pins
  task automatic spi_frame(input logic [7:0] cmd, input logic [15:0] a, input logic [15:0] d,
                           output logic [15:0] got);
    automatic logic [39:0] f = {cmd, a, d};
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
  task automatic spi_wr(input logic [15:0] a, input logic [15:0] d);
    logic [15:0] g; spi_frame(8'h01, a, d, g);
  endtask
  task automatic spi_rd(input logic [15:0] a, output logic [15:0] d);
    spi_frame(8'h02, a, 16'h0, d);
  endtask

  task automatic send(input bit pol, input int x, input int y);
    @(negedge clk); aerin_addr = {pol, 5'(y), 5'(x)}; aerin_req = 1;
    while (!aerin_ack) @(negedge clk);
    aerin_req = 0;
    while (aerin_ack) @(negedge clk);
  endtask
  task automatic ext_tick();
    repeat (2) @(negedge clk); tick_ext = 1; repeat (3) @(negedge clk); tick_ext = 0;
  endtask
  function automatic bit on_pattern(int c, int x, int y);
    case (c)
      0: return x >= 14 && x <= 17 && y >= 4 && y <= 27;
      1: return y >= 14 && y <= 17 && x >= 4 && x <= 27;
      2: return x >= 4 && x <= 27 && (x - y) >= -2 && (x - y) <= 2;
      default: return x >= 6 && x <= 25 && y >= 6 && y <= 25 && (x <= 8 || x >= 23 || y <= 8 || y >= 23);
    endcase
  endfunction
  // one sample; returns the label the chip inferred
  task automatic run_sample(input int c, output int got);
    int px [1024], n = 0, dx = $urandom_range(0, 4) - 2, dy = $urandom_range(0, 4) - 2;
    for (int y = 0; y < 32; y++)
      for (int x = 0; x < 32; x++)
        if (on_pattern(c, x - dx, y - dy) && $urandom_range(0, 9) >= 2) begin px[n] = y * 32 + x; n++; end
    for (int i = n - 1; i > 0; i--) begin
      automatic int j = $urandom_range(0, i), t = px[i]; px[i] = px[j]; px[j] = t;
    end
    label = 4'(c);
    aer_label = -1;
    @(negedge clk); data_sync = 1; @(negedge clk); data_sync = 0;
    for (int i = 0; i < n; i++) begin
      if ($urandom_range(0, 3) == 0) ext_tick();
      send(1'b1, px[i] % 32, px[i] / 32);
    end
    while (!dut.u_conv.fifo_empty || dut.u_conv.busy && !dut.u_conv.sample_open) @(negedge clk);
    while (dut.u_conv.state == dut.u_conv.S_EVENT) @(negedge clk);
    @(negedge clk); infer_req = 1; @(negedge clk); infer_req = 0;
    while (!dut.conv_done) @(negedge clk);
    @(negedge clk);
    while (dut.fc_busy) @(negedge clk);
    got = aer_label;
  endtask
  initial begin
    int hits [EPOCHS], got, last;
    repeat (5) @(posedge clk); rst = 0;
    while (dut.u_conv.busy || dut.fc_busy) @(negedge clk);
    spi_wr(16'h0000, 16'h0003);   // first-spike gating and learning on
    for (int e = 0; e < EPOCHS; e++) begin
      hits[e] = 0;
      for (int s = 0; s < NCLS * PER_CLASS; s++) begin
        automatic int c = $urandom_range(0, NCLS - 1);
        run_sample(c, got);
        if (got == c) hits[e]++;
      end
      $display("epoch %0d: %0d of %0d correct", e, hits[e], NCLS * PER_CLASS);
    end
    last = hits[EPOCHS-1] + hits[EPOCHS-2] + hits[EPOCHS-3];
    chk(last * 2 >= 3 * NCLS * PER_CLASS, $sformatf("last three epochs %0d of %0d correct", last, 3 * NCLS * PER_CLASS));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
