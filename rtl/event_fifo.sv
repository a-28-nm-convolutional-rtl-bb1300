// event_fifo - 32-stage FIFO buffering input events for the CONV core.
//
// Each entry is the 19-bit word {polarity, 8-bit timestamp, x[4:0], y[4:0]}
// (widths as printed in the paper's CONV core diagram).  Write and read use
// valid/ready handshakes; both may happen in the same cycle.  `flush` empties
// the FIFO in one cycle (used when inference is requested early).  Output
// data is the head entry, valid whenever the FIFO is not empty.  Depth and
// width follow the paper; the handshake and flush are this design's choices.
module event_fifo #(
  parameter int DEPTH = 32,
  parameter int W     = 19
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         flush,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic         empty
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   count;
  logic          do_wr, do_rd;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != 0);
  assign empty     = (count == 0);
  assign out_data  = mem[rp];
  assign do_wr     = in_valid && (count != (AW+1)'(DEPTH));
  assign do_rd     = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (rst || flush) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  // occupancy never exceeds the depth
  assert property (@(posedge clk) disable iff (rst) count <= (AW+1)'(DEPTH));
endmodule
