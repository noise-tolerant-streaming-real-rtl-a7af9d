// pingpong_buf: two-bank cell double buffer between two pipeline stages.
//
// The writing stage fills one bank while the reading stage empties the other;
// this is the double buffering the paper places between every pair of
// pipeline stages. Each side may use several byte lanes per clock, each with
// its own address (the RX decoder stage reads two and writes eight). The
// writer may write while w_ready is high and ends a bank with w_done, which
// also stores a status tag for the bank; the reader sees r_avail, reads with a
// one-clock latency, and releases the bank with r_done. r_more says that the
// next bank is complete as well, so a reader that must keep pace with the
// writer can move on to it without an idle clock. The bank hand-over
// uses two-bit Gray counters passed through two-flop synchronisers, so the
// two sides may run on unrelated clocks (the receive stage 2/3 boundary is
// where the link crosses from the recovered clock to the local clock). The
// handshake and storage layout are this design's choices.
//
// With PACED=1 (receive stage 1 to 2) the writer never waits: the reader
// starts on a full bank within a few clocks and reads each byte long before
// the writer returns to it two cells later, so writes are not gated and the
// reader may still be finishing a bank while the next-but-one cell starts.
module pingpong_buf #(
  parameter int DEPTH  = 608,   // bytes per bank
  parameter int WLANES = 1,
  parameter int RLANES = 1,
  parameter int TAGW   = 1,
  // PACED=1: the writer is paced by the wire and cannot wait; it always writes
  // and w_ready then only reports that the reader has not been overrun
  parameter bit PACED  = 1'b0,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic                     wclk,
  input  logic                     wrst_n,
  input  logic [WLANES-1:0]        w_en,
  input  logic [WLANES-1:0][AW-1:0] w_addr,
  input  logic [WLANES-1:0][7:0]   w_data,
  input  logic                     w_done,
  input  logic [TAGW-1:0]          w_tag,
  output logic                     w_ready,

  input  logic                     rclk,
  input  logic                     rrst_n,
  input  logic [RLANES-1:0][AW-1:0] r_addr,
  output logic [RLANES-1:0][7:0]   r_data,
  input  logic                     r_done,
  output logic                     r_avail,
  output logic                     r_more,    // the other bank is full too
  output logic [TAGW-1:0]          r_tag
);
  logic [7:0]      mem [2][DEPTH];
  logic [TAGW-1:0] tag [2];

  // binary counts of completed banks on each side, Gray copies for crossing
  logic [1:0] wcnt, rcnt, wgray, rgray;
  logic [1:0] rgray_s1, rgray_s2, wgray_s1, wgray_s2;
  logic [1:0] rcnt_w, wcnt_r;

  function automatic logic [1:0] g2b(input logic [1:0] g);
    return {g[1], g[1] ^ g[0]};
  endfunction

  assign wgray = wcnt ^ (wcnt >> 1);
  assign rgray = rcnt ^ (rcnt >> 1);
  assign rcnt_w = g2b(rgray_s2);
  assign wcnt_r = g2b(wgray_s2);
  assign w_ready = PACED ? ((wcnt - rcnt_w) != 2'd3) : ((wcnt - rcnt_w) != 2'd2);
  assign r_avail = wcnt_r != rcnt;
  assign r_more  = (wcnt_r - rcnt) >= 2'd2;

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wcnt     <= '0;
      rgray_s1 <= '0;
      rgray_s2 <= '0;
    end else begin
      rgray_s1 <= rgray;
      rgray_s2 <= rgray_s1;
      if (w_done && w_ready) wcnt <= wcnt + 1'b1;
    end
  end

  always_ff @(posedge wclk) begin
    for (int l = 0; l < WLANES; l++)
      if (w_en[l] && w_ready) mem[wcnt[0]][w_addr[l]] <= w_data[l];
    if (w_done && w_ready) tag[wcnt[0]] <= w_tag;
  end

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rcnt     <= '0;
      wgray_s1 <= '0;
      wgray_s2 <= '0;
    end else begin
      wgray_s1 <= wgray;
      wgray_s2 <= wgray_s1;
      if (r_done && r_avail) rcnt <= rcnt + 1'b1;
    end
  end

  always_ff @(posedge rclk) begin
    for (int l = 0; l < RLANES; l++) r_data[l] <= mem[rcnt[0]][r_addr[l]];
  end
  assign r_tag = tag[rcnt[0]];
endmodule
