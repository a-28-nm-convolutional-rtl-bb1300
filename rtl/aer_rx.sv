// aer_rx - four-phase address-event (AER) receiver, the input side of the chip.
//
// The sensor raises REQ with an 11-bit address {polarity, y[4:0], x[4:0]}
// (polarity 1 = ON event); the receiver captures the address, raises ACK,
// waits for REQ to fall and then lowers ACK (four-phase handshake, as the
// paper specifies).  REQ is synchronised with two flip-flops; ADDR is treated
// as bundled data and is stable by the time synchronised REQ is seen.  The
// captured event is offered on a valid/ready port; ACK is not raised until
// the event is accepted, so a full FIFO back-pressures the sensor.  The bit
// order of the address and the back-pressure are this design's choices.
//
// Timing: ACK rises 3 cycles after REQ when downstream is ready.
module aer_rx #(
  parameter int ADDR_W = 11
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              aer_req,
  input  logic [ADDR_W-1:0] aer_addr,
  output logic              aer_ack,
  output logic              ev_valid,
  input  logic              ev_ready,
  output logic              ev_pol,
  output logic [4:0]        ev_x,
  output logic [4:0]        ev_y
);
  logic [1:0] req_sync;
  typedef enum logic [1:0] {IDLE, HOLD, ACK_HI} state_t;
  state_t state;
  logic [ADDR_W-1:0] addr_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      req_sync <= '0;
      state    <= IDLE;
      addr_q   <= '0;
      aer_ack  <= 1'b0;
    end else begin
      req_sync <= {req_sync[0], aer_req};
      unique case (state)
        IDLE:   if (req_sync[1]) begin
                  addr_q <= aer_addr;
                  state  <= HOLD;
                end
        HOLD:   if (ev_ready) begin
                  aer_ack <= 1'b1;
                  state   <= ACK_HI;
                end
        ACK_HI: if (!req_sync[1]) begin
                  aer_ack <= 1'b0;
                  state   <= IDLE;
                end
        default: state <= IDLE;
      endcase
    end
  end

  assign ev_valid = (state == HOLD);
  assign ev_pol   = addr_q[ADDR_W-1];
  assign ev_y     = addr_q[9:5];
  assign ev_x     = addr_q[4:0];
endmodule
