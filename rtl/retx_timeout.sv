// retx_timeout: acknowledgement, timeout and retransmission bookkeeping.
//
// Every cell handed to the transmit pipeline is numbered from the transmit
// sequence counter (tx_seq) and its description - sequence number, control
// field and data offset before the cell, 48 bits - is pushed into the
// in-flight FIFO. The far end reports in every good header the sequence
// number it expects next (ack_next). While that number is ahead of the
// sequence number at the FIFO head by 1..TIMEOUT, the head cell has arrived:
// it is purged and its control field is reported on cmp_* so the transmitter
// can complete message, trigger-pattern and link-initialisation requests.
// When a pushed sequence number is more than TIMEOUT ahead of the head, a
// cell was lost: tx_seq is reloaded from the head's sequence number and the
// 32-bit control/offset parts of all FIFO entries are moved, one per clock
// (busy high), into the retransmit FIFO. The transmitter then rebuilds those
// cells in order (rt_*, rt_pop together with push), which re-enters them in
// the in-flight FIFO with their original numbers. If the retransmit FIFO
// drains without any purge since the timeout, a new timeout is declared.
// The timeout is tunable at run time (timeout_set, in cells), up to the
// TIMEOUT parameter that sizes the in-flight FIFO.
// All of this follows the paper's Section 4; the FIFO depth, one-transfer-per
// clock and purge rate of one per clock are this design's choices. `clear`
// (link re-initialisation) empties both FIFOs and zeroes tx_seq.
// Lint note: rst_n also feeds the assertions' 'disable iff', which verilator
// reports as a reset used both synchronously and asynchronously.
module retx_timeout
  import link_pkg::*;
#(
  parameter int TIMEOUT = 20,   // cell lengths, round trip
  parameter int DEPTH   = 32,   // in-flight FIFO entries (> TIMEOUT + 1)
  localparam int PW     = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic [15:0] timeout_set,   // round-trip timeout in cells, 1..TIMEOUT
  output logic [15:0] tx_seq,
  input  logic        push,
  input  ctrl_t       push_ctrl,
  input  logic [15:0] push_off,
  input  logic        ack_valid,
  input  logic [15:0] ack_next,
  output logic        cmp_valid,
  output ctrl_t       cmp_ctrl,
  output logic [15:0] cmp_off,
  output logic        rt_valid,
  output ctrl_t       rt_ctrl,
  output logic [15:0] rt_off,
  input  logic        rt_pop,
  output logic        busy,
  output logic        timeout_evt
);
  cell_desc_t  f1 [DEPTH];
  logic [31:0] f2 [DEPTH];
  logic [PW:0] h1, t1, h2, t2;
  logic [15:0] far_next;
  logic        purged;     // a purge happened since the last timeout
  logic        xfer;

  logic        empty1, empty2;
  cell_desc_t  head;
  logic [15:0] ack_dist, push_dist;
  logic        do_purge, do_timeout;
  logic [15:0] to_lim;

  assign empty1    = h1 == t1;
  assign empty2    = h2 == t2;
  assign head      = f1[h1[PW-1:0]];
  // run-time timeout; 0 or a value above the FIFO's capacity selects TIMEOUT
  assign to_lim    = (timeout_set == 16'd0 || timeout_set > 16'(TIMEOUT)) ? 16'(TIMEOUT) : timeout_set;
  assign ack_dist  = far_next - head.seq;
  assign push_dist = tx_seq - head.seq;
  assign do_purge  = !xfer && !empty1 && ack_dist != 16'd0 && ack_dist <= to_lim;
  assign do_timeout = !xfer && !empty1 && !do_purge &&
                      ((push && push_dist > to_lim) ||
                       (rt_pop && (t2 - h2) == 1 && !purged));

  assign rt_valid  = !empty2 && !xfer;
  assign rt_ctrl   = ctrl_t'(f2[h2[PW-1:0]][31:16]);
  assign rt_off    = f2[h2[PW-1:0]][15:0];
  assign busy      = xfer;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h1 <= '0; t1 <= '0; h2 <= '0; t2 <= '0;
      tx_seq      <= '0;
      far_next    <= '0;
      purged      <= 1'b0;
      xfer        <= 1'b0;
      cmp_valid   <= 1'b0;
      cmp_ctrl    <= '0;
      cmp_off     <= '0;
      timeout_evt <= 1'b0;
    end else if (clear) begin
      h1 <= '0; t1 <= '0; h2 <= '0; t2 <= '0;
      tx_seq      <= '0;
      far_next    <= '0;
      purged      <= 1'b0;
      xfer        <= 1'b0;
      cmp_valid   <= 1'b0;
      timeout_evt <= 1'b0;
    end else begin
      cmp_valid   <= 1'b0;
      timeout_evt <= 1'b0;
      if (ack_valid) far_next <= ack_next;
      if (push) begin
        f1[t1[PW-1:0]] <= '{seq: tx_seq, ctrl: push_ctrl, off_excl: push_off};
        t1     <= t1 + 1'b1;
        tx_seq <= tx_seq + 16'd1;
      end
      if (rt_pop) h2 <= h2 + 1'b1;
      if (do_purge) begin
        h1        <= h1 + 1'b1;
        purged    <= 1'b1;
        cmp_valid <= 1'b1;
        cmp_ctrl  <= head.ctrl;
        cmp_off   <= head.off_excl;
      end
      if (do_timeout) begin
        xfer        <= 1'b1;
        purged      <= 1'b0;
        timeout_evt <= 1'b1;
        tx_seq      <= head.seq;
      end
      if (xfer) begin
        if (h1 == t1) begin
          xfer <= 1'b0;
        end else begin
          f2[t2[PW-1:0]] <= {head.ctrl, head.off_excl};
          t2 <= t2 + 1'b1;
          h1 <= h1 + 1'b1;
        end
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> (t1 - h1) < (PW+1)'(DEPTH));
  a_push_idle:   assert property (@(posedge clk) disable iff (!rst_n) push |-> !xfer);
endmodule
