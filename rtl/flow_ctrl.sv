// flow_ctrl: four-phase request/grant backpressure for the 16 receive
// buffers of each message circuit (beam-synchronous, beam-asynchronous).
//
// Each end sends, per circuit, a 32-bit header longword {rdy[15:0], acq[15:0]}:
//   rdy[i]  receiver side: local buffer i is free and may be filled;
//   acq[i]  transmitter side: a message into the far end's buffer i has been
//           completed (its last cell acknowledged).
// Phases for one buffer (every step reacts to a level, so a lost or corrupted
// header only delays it):
//   1. the receiver raises rdy once the processor has armed the buffer and the
//      far acq is low;
//   2. the transmitter starts a message while far rdy is high and its own acq
//      is low (the builder runs one message per circuit at a time, so nothing
//      else is sent to that buffer until the message completes);
//   3. when the last cell is acknowledged the transmitter raises acq;
//   4. the receiver drops rdy once it has received that last cell (rx_last,
//      remembered in got_last) and sees acq high;
//   5. the transmitter drops acq once it sees rdy low; back to 1.
// rdy is not dropped at rx_last alone: a header with rdy low generated
// before the transmitter raised acq would let the transmitter drop acq
// again before the receiver had ever seen it. The paper specifies that the
// two longwords carry a full four-way request-grant handshake for 16 buffers
// per circuit and that the last cell marks the buffer; the bit assignment
// and the exact phase rules are this design's.
module flow_ctrl
  import link_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic [1:0][NBUF-1:0] arm,        // processor frees a local buffer (pulse)
  input  logic                 rx_last,    // last cell of a message received
  input  logic                 rx_circ,    // 0 = sync, 1 = async
  input  logic [3:0]           rx_buf,
  input  logic                 tx_done,    // last cell of a sent message acknowledged
  input  logic                 tx_circ,
  input  logic [3:0]           tx_buf,
  input  logic                 far_valid,  // a good header arrived
  input  logic [1:0][31:0]     far_word,
  output logic [1:0][31:0]     hdr_word,   // header longwords 2 and 3
  output logic [1:0][NBUF-1:0] grant       // may start a message to far buffer i
);
  logic [1:0][NBUF-1:0] rdy, acq, arm_pend, got_last, far_rdy, far_acq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdy <= '0; acq <= '0; arm_pend <= '0; got_last <= '0; far_rdy <= '0; far_acq <= '0;
    end else if (clear) begin
      rdy <= '0; acq <= '0; got_last <= '0; far_rdy <= '0; far_acq <= '0;
    end else begin
      for (int c = 0; c < 2; c++) begin
        if (far_valid) begin
          far_rdy[c] <= far_word[c][31:16];
          far_acq[c] <= far_word[c][15:0];
        end
        for (int i = 0; i < NBUF; i++) begin
          // receiver side
          if (arm[c][i]) arm_pend[c][i] <= 1'b1;
          if (rx_last && int'(rx_circ) == c && int'(rx_buf) == i)
            got_last[c][i] <= 1'b1;
          if (rdy[c][i]) begin
            if (got_last[c][i] && far_acq[c][i]) begin
              rdy[c][i]      <= 1'b0;
              got_last[c][i] <= 1'b0;
            end
          end else if (arm_pend[c][i] && !far_acq[c][i]) begin
            rdy[c][i]      <= 1'b1;
            arm_pend[c][i] <= 1'b0;
          end
          // transmitter side
          if (tx_done && int'(tx_circ) == c && int'(tx_buf) == i)
            acq[c][i] <= 1'b1;
          else if (acq[c][i] && far_valid && !far_word[c][16 + i])
            acq[c][i] <= 1'b0;
        end
      end
    end
  end

  always_comb
    for (int c = 0; c < 2; c++) begin
      hdr_word[c] = {rdy[c], acq[c]};
      grant[c]    = far_rdy[c] & ~acq[c];
    end
endmodule
