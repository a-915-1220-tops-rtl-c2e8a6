// aer_decoder: receives address events from the sensor's AER encoder and
// hands each event's x/y address to the event FIFO.
//
// The sensor side uses a four-phase handshake with active-low request and
// acknowledge (AER_nreq / AER_nack) and a bundled address word that is
// stable while the request is low. The decoder runs on AER_CLK, which is also
// the FIFO write clock. The request is synchronised with two flip-flops;
// when it is seen low and the FIFO has room, the address is split into
// {y, x}, data_valid (the FIFO write strobe) pulses for one cycle and the
// acknowledge goes low. The acknowledge returns high once the request has
// been released. While the FIFO is full the acknowledge is held back, which
// stalls the sensor. Signal names follow the chip; the protocol details,
// the word format and the full-FIFO backpressure are this design's choices.
//
// Timing: one event takes at least 2 synchroniser cycles + 1 cycle for the
// request and as many for its release.
module aer_decoder
  import cram_pkg::*;
#(
  parameter int unsigned XW = X_W,
  parameter int unsigned YW = Y_W
) (
  input  logic          aer_clk,
  input  logic          rst_n,
  input  logic          aer_nreq,
  input  logic [XW+YW-1:0] aer_data,
  output logic          aer_nack,
  input  logic          fifo_full,
  output logic [XW-1:0] x_addr,
  output logic [YW-1:0] y_addr,
  output logic          data_valid
);
  typedef enum logic {S_IDLE, S_ACK} state_e;
  state_e state;
  logic [1:0] req_sync;  // active-high request after synchronisation
  logic       req;

  always_ff @(posedge aer_clk or negedge rst_n) begin
    if (!rst_n) req_sync <= '0;
    else        req_sync <= {req_sync[0], ~aer_nreq};
  end
  assign req = req_sync[1];

  always_ff @(posedge aer_clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      aer_nack   <= 1'b1;
      data_valid <= 1'b0;
      x_addr     <= '0;
      y_addr     <= '0;
    end else begin
      data_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (req && !fifo_full) begin
          {y_addr, x_addr} <= aer_data;
          data_valid       <= 1'b1;
          aer_nack         <= 1'b0;
          state            <= S_ACK;
        end
        S_ACK: if (!req) begin
          aer_nack <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A write is never issued while the FIFO is full.
  assert property (@(posedge aer_clk) disable iff (!rst_n) data_valid |-> $past(!fifo_full));
endmodule
