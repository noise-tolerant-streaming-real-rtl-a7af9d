// tb_retx_timeout: a cell-level model of the link around the acknowledgement
// logic. Every 8 clocks the tb sends one cell: the next retransmission if one
// is queued, otherwise a new cell (its data offset is a unique tag). The far
// end sees a cell 3 slots later, accepts it only if its sequence number is
// the one it expects (go-back-N), and its next-expected number comes back 3
// slots after that. Phase 1 runs clean; phase 2 drops one cell; phase 3
// disconnects the far end for a while. Checks: every cell completes exactly
// once and in order; retransmitted cells keep their original sequence number;
// timeouts happen in phases 2 and 3 (including the repeat timeout when the
// retransmit FIFO drains with no acknowledgement) and never in phase 1.
module tb_retx_timeout;
  import link_pkg::*;
  localparam int TO = 8;
  logic clk = 0, rst_n = 0;
  logic clear = 0, push, ack_valid, cmp_valid, rt_valid, rt_pop, busy, timeout_evt;
  logic [15:0] tx_seq, push_off, ack_next, cmp_off, rt_off;
  ctrl_t push_ctrl, cmp_ctrl, rt_ctrl;
  logic [15:0] timeout_set = 16'(TO);
  int checks = 0, failures = 0;

  retx_timeout #(.TIMEOUT(TO), .DEPTH(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  int next_tag = 0, next_cmp = 0, far_exp = 0, n_timeouts = 0;
  int seq_of [int];
  int drop_tag = -1;
  bit dead = 0;
  typedef struct { int seq; int tag; } cellw_t;
  cellw_t wq [$];       // cells in flight toward the far end
  int ackq [$];         // next-expected values in flight back

  always @(posedge clk) if (rst_n) begin
    if (timeout_evt) n_timeouts++;
    if (cmp_valid) begin
      chk(int'(cmp_off) == next_cmp, $sformatf("completion %0d expected %0d", cmp_off, next_cmp));
      next_cmp = int'(cmp_off) + 1;
    end
  end

  task automatic slot();
    cellw_t cw;
    @(negedge clk);
    while (busy) @(negedge clk);
    if (rt_valid) begin
      chk(seq_of[int'(rt_off)] == int'(tx_seq), $sformatf("retransmit tag %0d seq %0d orig %0d", rt_off, tx_seq, seq_of[int'(rt_off)]));
      push = 1; rt_pop = 1; push_ctrl = rt_ctrl; push_off = rt_off;
      cw.tag = int'(rt_off);
    end else begin
      push = 1; rt_pop = 0; push_ctrl = '0; push_ctrl.buf_no = 4'(next_tag); push_off = 16'(next_tag);
      seq_of[next_tag] = int'(tx_seq);
      cw.tag = next_tag;
      next_tag++;
    end
    cw.seq = int'(tx_seq);
    wq.push_back(cw);
    @(negedge clk);
    push = 0; rt_pop = 0;
    // far end receives the cell sent three slots ago
    if (wq.size() > 3) begin
      cw = wq.pop_front();
      if (!dead && cw.tag != drop_tag && cw.seq == far_exp) far_exp++;
      else if (cw.tag == drop_tag) drop_tag = -1;   // lost only once
    end
    ackq.push_back(far_exp);
    if (ackq.size() > 3) begin
      ack_valid = !dead; ack_next = 16'(ackq.pop_front());
    end
    @(negedge clk);
    ack_valid = 0;
    repeat (5) @(negedge clk);
  endtask

  initial begin
    int t1, t2;
    push = 0; rt_pop = 0; ack_valid = 0; push_ctrl = '0; push_off = 0; ack_next = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (60) slot();
    chk(n_timeouts == 0, "no timeout on a clean link");
    chk(next_cmp >= 50, $sformatf("clean completions %0d", next_cmp));
    drop_tag = next_tag + 2;
    repeat (80) slot();
    t1 = n_timeouts;
    chk(t1 >= 1, "timeout after a lost cell");
    dead = 1;
    repeat (120) slot();
    t2 = n_timeouts;
    chk(t2 - t1 >= 2, $sformatf("repeat timeouts while disconnected: %0d", t2 - t1));
    dead = 0;
    repeat (150) slot();
    chk(next_cmp > 200, $sformatf("recovered after reconnect, %0d completions", next_cmp));
    $display("timeouts %0d completions %0d", n_timeouts, next_cmp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
