// aer_tx - four-phase AER transmitter for the inferred label (output side).
//
// A one-cycle `send` pulse latches the 4-bit label onto ADDR; REQ rises on the
// next cycle, the receiver answers with ACK, REQ falls, and the transfer ends
// when ACK falls again (four-phase handshake, as in the paper).  ACK is
// synchronised with two flip-flops.  `busy` is high from `send` until the
// end of the handshake; a `send` while busy is ignored.  The exact sequencing
// is this design's choice.
module aer_tx #(
  parameter int ADDR_W = 4
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              send,
  input  logic [ADDR_W-1:0] label,
  output logic              busy,
  output logic              aer_req,
  output logic [ADDR_W-1:0] aer_addr,
  input  logic              aer_ack
);
  logic [1:0] ack_sync;
  typedef enum logic [1:0] {IDLE, SETUP, WAIT_ACK, WAIT_NACK} state_t;
  state_t state;

  always_ff @(posedge clk) begin
    if (rst) begin
      ack_sync <= '0;
      state    <= IDLE;
      aer_req  <= 1'b0;
      aer_addr <= '0;
    end else begin
      ack_sync <= {ack_sync[0], aer_ack};
      unique case (state)
        IDLE:      if (send) begin
                     aer_addr <= label;
                     state    <= SETUP;
                   end
        SETUP:     begin
                     aer_req <= 1'b1;
                     state   <= WAIT_ACK;
                   end
        WAIT_ACK:  if (ack_sync[1]) begin
                     aer_req <= 1'b0;
                     state   <= WAIT_NACK;
                   end
        WAIT_NACK: if (!ack_sync[1]) state <= IDLE;
        default:   state <= IDLE;
      endcase
    end
  end

  assign busy = (state != IDLE);
endmodule
