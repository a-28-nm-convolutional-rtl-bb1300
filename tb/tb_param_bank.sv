// tb_param_bank - checks reset values of the configuration registers, random
// writes and read-backs through the internal SPI bus, the status register,
// the OR-combination of the other blocks' read data, and that accesses to
// other regions leave the registers alone.
module tb_param_bank;
  import spoon_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  spi_bus_t spi = '0; logic [15:0] conv_rdata = 0, fc_rdata = 0, drtp_rdata = 0, rdata;
  logic conv_busy = 0, fc_busy = 0; logic [3:0] last_label = 0; cfg_t cfg;
  logic [15:0] model [8];
  param_bank dut (.clk, .rst, .spi, .conv_rdata, .fc_rdata, .drtp_rdata, .conv_busy, .fc_busy,
                  .last_label, .cfg, .rdata);
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic logic [15:0] mask(int r);
    return r == 0 ? 16'h0007 : r == 1 ? 16'hffff : 16'h000f;
  endfunction
  task automatic rd(input logic [15:0] a, output logic [15:0] d);
    @(negedge clk); spi = '0; spi.re = 1; spi.addr = a;
    @(negedge clk); spi = '0; d = rdata;
  endtask
  initial begin
    logic [15:0] d;
    model = '{16'h0, 16'h0, 16'd8, 16'd8, 16'd4, 16'd4, 16'd6, 16'h0};
    repeat (3) @(posedge clk); rst = 0;
    for (int r = 0; r < 7; r++) begin rd(16'(r), d); chk(d == model[r], $sformatf("reset reg %0d = %h", r, d)); end
    for (int n = 0; n < 3000; n++) begin
      automatic int r = $urandom_range(0, 7);
      automatic logic [15:0] w = 16'($urandom);
      automatic int op = $urandom_range(0, 3);
      conv_busy = 1'($urandom); fc_busy = 1'($urandom); last_label = 4'($urandom);
      if (op == 0) begin
        @(negedge clk); spi = '0; spi.we = 1; spi.addr = 16'(r); spi.wdata = w;
        if (r < 7) model[r] = w & mask(r);
        @(negedge clk); spi = '0;
      end else if (op == 1) begin  // write to another region: ignored here
        @(negedge clk); spi = '0; spi.we = 1; spi.addr = {1'($urandom), 3'($urandom_range(1, 7)), 12'(r)}; spi.wdata = w;
        @(negedge clk); spi = '0;
      end else if (op == 2) begin
        rd(16'(r), d);
        if (r == 7) chk(d == {conv_busy, fc_busy, 10'b0, last_label}, "status");
        else chk(d == model[r], $sformatf("reg %0d = %h exp %h", r, d, model[r]));
      end else begin
        @(negedge clk); conv_rdata = 16'($urandom); fc_rdata = 16'($urandom); drtp_rdata = 16'($urandom); #1;
        chk(rdata == (conv_rdata | fc_rdata | drtp_rdata), "read-data OR");
        conv_rdata = 0; fc_rdata = 0; drtp_rdata = 0;
      end
      chk(cfg.gate_en == model[0][0] && cfg.train_en == model[0][1] && cfg.tick_en == model[0][2] &&
          cfg.tick_period == model[1] && cfg.cshift == model[2][3:0] && cfg.hshift == model[3][3:0] &&
          cfg.oshift == model[4][3:0] && cfg.lr_hid == model[5][3:0] && cfg.lr_out == model[6][3:0], "cfg outputs");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
