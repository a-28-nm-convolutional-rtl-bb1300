// timestamp_counter - 8-bit time-to-first-spike counter of the CONV core.
//
// DATA_SYNC marks the start of an input sample: the counter is loaded with
// its maximum value (255) and counts down by one on every TICK, stopping at
// zero.  An event is stamped with the current count, so the earliest spikes,
// which carry the most information, get the largest weight in the
// convolution.  `expired` is high while the count is zero; the CONV core uses
// it to start max-pooling once its FIFO is empty (the paper's rule).  Counting
// down from 255 is this design's reading of "falls to zero".
module timestamp_counter #(
  parameter int TS_W = 8
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            data_sync,
  input  logic            tick,
  output logic [TS_W-1:0] ts,
  output logic            expired
);
  always_ff @(posedge clk) begin
    if (rst)                  ts <= '0;
    else if (data_sync)       ts <= '1;
    else if (tick && ts != 0) ts <= ts - 1'b1;
  end
  assign expired = (ts == 0);
endmodule
