// param_bank - configuration registers and SPI read-back multiplexer.
//
// Holds the chip's configurable parameters (the paper lists first-spike
// gating, the internal tick generator, the CONV rescaling and the learning
// rates as configurable; the register layout is this design's):
//   0 CTRL   [0] first-spike gating enable, [1] on-chip training enable,
//            [2] local tick generator enable
//   1 TICK   local tick period minus one (16 bits)
//   2 CSHIFT CONV activation rescaling shift       (reset 8)
//   3 HSHIFT hidden activation scaling shift       (reset 8)
//   4 OSHIFT output activation scaling shift       (reset 4)
//   5 LRH    hidden learning rate (left shift)     (reset 4)
//   6 LRO    output learning rate (left shift)     (reset 6)
//   7 STATUS read only: {conv busy, fc busy, 10'b0, last inferred label}
// Writes take effect on the clock after the SPI write strobe.  Reads answer
// one cycle after the strobe; the memories of the cores answer on their own
// `*_rdata` inputs at the same time, and all are OR-ed (only the addressed
// one is nonzero).
module param_bank
  import spoon_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  spi_bus_t    spi,
  input  logic [15:0] conv_rdata,
  input  logic [15:0] fc_rdata,
  input  logic [15:0] drtp_rdata,
  input  logic        conv_busy,
  input  logic        fc_busy,
  input  logic [3:0]  last_label,
  output cfg_t        cfg,
  output logic [15:0] rdata
);
  logic sel;
  logic [15:0] own_q;
  assign sel = !spi.addr[15] && spi.addr[14:12] == REG_CFG[2:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg         <= '0;
      cfg.cshift  <= 4'd8;
      cfg.hshift  <= 4'd8;
      cfg.oshift  <= 4'd4;
      cfg.lr_hid  <= 4'd4;
      cfg.lr_out  <= 4'd6;
      own_q       <= '0;
    end else begin
      if (spi.we && sel) begin
        unique case (spi.addr[3:0])
          CFG_CTRL:   {cfg.tick_en, cfg.train_en, cfg.gate_en} <= spi.wdata[2:0];
          CFG_TICK:   cfg.tick_period <= spi.wdata;
          CFG_CSHIFT: cfg.cshift <= spi.wdata[3:0];
          CFG_HSHIFT: cfg.hshift <= spi.wdata[3:0];
          CFG_OSHIFT: cfg.oshift <= spi.wdata[3:0];
          CFG_LRH:    cfg.lr_hid <= spi.wdata[3:0];
          CFG_LRO:    cfg.lr_out <= spi.wdata[3:0];
          default: ;
        endcase
      end
      own_q <= '0;
      if (spi.re && sel) begin
        unique case (spi.addr[3:0])
          CFG_CTRL:   own_q <= {13'b0, cfg.tick_en, cfg.train_en, cfg.gate_en};
          CFG_TICK:   own_q <= cfg.tick_period;
          CFG_CSHIFT: own_q <= {12'b0, cfg.cshift};
          CFG_HSHIFT: own_q <= {12'b0, cfg.hshift};
          CFG_OSHIFT: own_q <= {12'b0, cfg.oshift};
          CFG_LRH:    own_q <= {12'b0, cfg.lr_hid};
          CFG_LRO:    own_q <= {12'b0, cfg.lr_out};
          CFG_STATUS: own_q <= {conv_busy, fc_busy, 10'b0, last_label};
          default:    own_q <= '0;
        endcase
      end
    end
  end

  assign rdata = own_q | conv_rdata | fc_rdata | drtp_rdata;
endmodule
