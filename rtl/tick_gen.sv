// tick_gen - time reference for time-to-first-spike coding.
//
// The TICK that advances the timestamp counter comes either from the
// external TICK_EXT pin or from a configurable synchronous on-chip divider
// (both as in the paper).  TICK_EXT is synchronised with two flip-flops and
// its rising edge gives a one-cycle tick.  The local divider, when enabled,
// emits a one-cycle tick every `period`+1 clock cycles.  The two sources are
// merged so that either one produces a tick (the block diagram joins them in
// a gate whose type is not stated; the merge is this design's reading).
// Divider structure and synchronisation are this design's choices.
module tick_gen #(
  parameter int PERIOD_W = 16
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                tick_ext,
  input  logic                local_en,
  input  logic [PERIOD_W-1:0] period,
  output logic                tick
);
  logic [2:0]          ext_sync;
  logic [PERIOD_W-1:0] cnt;
  logic                local_tick;

  always_ff @(posedge clk) begin
    if (rst) begin
      ext_sync   <= '0;
      cnt        <= '0;
      local_tick <= 1'b0;
    end else begin
      ext_sync   <= {ext_sync[1:0], tick_ext};
      local_tick <= 1'b0;
      if (!local_en) begin
        cnt <= '0;
      end else if (cnt >= period) begin
        cnt        <= '0;
        local_tick <= 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  assign tick = local_tick | (ext_sync[1] & ~ext_sync[2]);
endmodule
