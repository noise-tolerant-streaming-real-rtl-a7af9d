// tb_tx_cell_builder: drives the cell builder with message, trigger and
// far-end init-write requests, plays the acknowledgement/retransmit side and
// the message memory, and captures every cell written into the double
// buffer.
// Per cell it checks the header (control field, data offset, init-register
// word, sequence number) and the payload against the memory, the trigger
// pattern or all zeros. Per message it checks that segments come in order
// with correct first/last flags. It also checks: no message starts before
// its buffer is granted; a sync message started during an async message
// takes over at the next cell; a trigger request is served by the next new
// cell or the one after; after a simulated timeout the queued cells are
// resent first, with their original sequence number, control field and
// payload; completions end messages (msg_irq, flow-control done) and
// trigger/init requests. The double buffer is made to refuse cells at
// random, which stalls the builder.
module tb_tx_cell_builder;
  import link_pkg::*;
  localparam int AW = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic enable;
  logic [1:0] msg_go, msg_busy, msg_irq;
  logic [1:0][AW-1:0] msg_base;
  logic [1:0][15:0] msg_len;
  logic [1:0][3:0] msg_buf;
  logic trig_go, trig_busy, initw_go, initw_busy;
  logic [TRIG_WORDS-1:0][31:0] trig_data;
  logic [31:0] initw_data;
  logic [1:0][NBUF-1:0] grant;
  logic fc_tx_done, fc_tx_circ;
  logic [3:0] fc_tx_buf;
  logic [1:0][31:0] fc_word;
  logic [15:0] rx_next, tx_seq, push_off, rt_off;
  logic [5:0][15:0] err_cnt;
  logic push, rt_valid, rt_pop, rt_busy, cmp_valid;
  ctrl_t push_ctrl, rt_ctrl, cmp_ctrl;
  logic mem_rd_en;
  logic [AW-1:0] mem_rd_addr;
  logic [31:0] mem_rd_data;
  logic w_ready, w_en, w_done;
  logic [8:0] w_addr;
  logic [7:0] w_data;

  tx_cell_builder #(.AW(AW)) dut (.*);

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL %s", msg); end
  endtask

  function automatic logic [31:0] memw(input logic [AW-1:0] a);
    return {a, 4'hA, a[7:0] ^ 8'h3C} * 32'h9E3779B1;
  endfunction
  always_ff @(posedge clk) if (mem_rd_en) mem_rd_data <= memw(mem_rd_addr);

  // ---- cell capture ----
  logic [7:0] cbuf [DATA_BYTES];
  always @(posedge clk) if (w_en) cbuf[w_addr] <= w_data;

  typedef struct {
    int seq; ctrl_t ctrl; int off; bit retx;
    logic [7:0] bytes [DATA_BYTES];
  } cellrec_t;
  cellrec_t unacked [$];       // sent, not yet acknowledged, oldest first
  cellrec_t rtq [$];           // queued for retransmission
  cellrec_t pushed;
  bit pushed_valid = 0;

  // counters of what happened
  int n_cells = 0, n_noop = 0, n_trig = 0, n_retx = 0, n_preempt = 0, n_stall = 0;
  int n_initw = 0, n_irq = 0, n_fcdone = 0;
  int expect_off [2];
  int last_msg_circ = -1;
  int msg_since_trig = -1, trig_wait = -1;
  bit hold_acks = 0;
  bit grant_seen_before_start [2];

  // retx_timeout model: sequence counter and head of the retransmit queue
  always_comb begin
    rt_valid = rtq.size() != 0;
    rt_ctrl  = rt_valid ? rtq[0].ctrl : '0;
    rt_off   = rt_valid ? 16'(rtq[0].off) : '0;
  end

  always @(posedge clk) if (rst_n) begin
    if (push) begin
      pushed.seq = int'(tx_seq); pushed.ctrl = push_ctrl; pushed.off = int'(push_off);
      pushed.retx = rt_pop;
      pushed_valid = 1;
      if (rt_pop) begin
        chk(rt_valid, "pop without a queued cell");
        chk(int'(tx_seq) == rtq[0].seq, $sformatf("retransmit sequence %0d, original %0d", tx_seq, rtq[0].seq));
      end
      tx_seq <= tx_seq + 16'd1;
      if (rt_pop) void'(rtq.pop_front());
      if (!rt_pop && push_ctrl.circuit != CIRC_NOOP) begin
        if (msg_since_trig >= 0) begin
          if (push_ctrl.circuit == CIRC_TRIG) trig_wait = msg_since_trig;
          else msg_since_trig++;
        end
      end
    end
    if (rst_n && msg_irq != 0) n_irq++;
    if (rst_n && fc_tx_done) n_fcdone++;
  end

  // check a completed cell
  task automatic check_cell(cellrec_t c);
    logic [31:0] hw [8];
    int nb, c_i;
    for (int k = 0; k < 8; k++)
      hw[k] = {c.bytes[RS_K*(4*k)], c.bytes[RS_K*(4*k+1)], c.bytes[RS_K*(4*k+2)], c.bytes[RS_K*(4*k+3)]};
    chk(hw[0][31:16] == 16'(c.ctrl), $sformatf("cell control %h, pushed %h", hw[0][31:16], 16'(c.ctrl)));
    chk(int'(hw[4][31:16]) == c.seq, "header sequence number");
    chk(hw[4][15:0] == rx_next, "header next-expected");
    chk(hw[2] == fc_word[0] && hw[3] == fc_word[1], "header flow-control words");
    if (c.ctrl.init_we) chk(hw[1] == initw_data, "init register word");
    c_i = c.ctrl.circuit == CIRC_ASYNC;
    nb = 0;
    if (c.ctrl.circuit == CIRC_SYNC || c.ctrl.circuit == CIRC_ASYNC) begin
      int nch;
      nch = c.ctrl.last ? int'(msg_len[c_i]) - c.off : CELL_CHUNKS;
      nb = nch * CHUNK_BYTES;
      chk(int'(hw[0][15:0]) == c.off + nch, "data offset field");
      chk(c.ctrl.first == (c.off == 0), "first flag");
      chk(c.ctrl.buf_no == msg_buf[c_i], "buffer number");
    end else if (c.ctrl.circuit == CIRC_TRIG) nb = 4 * TRIG_WORDS;
    for (int d = 0; d < PAY_BYTES; d++) begin
      logic [7:0] exp_b, got_b;
      got_b = c.bytes[RS_K*(d/10) + 1 + d%10];
      if (d >= nb) exp_b = 8'h00;
      else if (c.ctrl.circuit == CIRC_TRIG) exp_b = trig_data[d/4][8*(3-d%4) +: 8];
      else begin
        logic [31:0] w;
        w = memw(AW'(msg_base[c_i] + AW'(c.off * 16 + d / 4)));
        exp_b = w[8*(3-d%4) +: 8];
      end
      if (got_b !== exp_b) begin
        chk(0, $sformatf("payload byte %0d of cell seq %0d: %h, expected %h", d, c.seq, got_b, exp_b));
        break;
      end
    end
    checks++;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (w_done) begin
      cellrec_t c;
      c = pushed;
      c.bytes = cbuf;
      // the byte written on this same edge is not in cbuf yet
      if (w_en) c.bytes[w_addr] = w_data;
      chk(pushed_valid, "cell without a push");
      pushed_valid = 0;
      n_cells++;
      check_cell(c);
      if (c.retx) begin
        n_retx++;
        foreach (unacked[i])
          if (unacked[i].seq == c.seq) begin
            chk(unacked[i].bytes[RS_K*0] == c.bytes[RS_K*0] && unacked[i].bytes[RS_K*1] == c.bytes[RS_K*1], "retransmit control bytes");
            for (int d = 0; d < PAY_BYTES; d++)
              if (unacked[i].bytes[RS_K*(d/10)+1+d%10] != c.bytes[RS_K*(d/10)+1+d%10]) begin
                chk(0, "retransmitted payload differs");
                break;
              end
          end
      end else begin
        case (c.ctrl.circuit)
          CIRC_NOOP: n_noop++;
          CIRC_TRIG: n_trig++;
          default: begin
            int ci;
            ci = c.ctrl.circuit == CIRC_ASYNC;
            chk(c.off == expect_off[ci], $sformatf("circuit %0d segment offset %0d, expected %0d", ci, c.off, expect_off[ci]));
            expect_off[ci] = c.ctrl.last ? 0 : c.off + CELL_CHUNKS;
            chk(grant_seen_before_start[ci] || c.off != 0, "message started without a grant");
            if (ci == 0 && last_msg_circ == 1 && msg_busy[1]) n_preempt++;
            last_msg_circ = ci;
          end
        endcase
        if (c.ctrl.init_we) n_initw++;
        unacked.push_back(c);
      end
    end
  end

  // acknowledgements: the oldest cell is acknowledged once three newer ones
  // have been sent, unless a timeout is being simulated
  always @(negedge clk) begin
    cmp_valid = 0;
    if (!hold_acks && rtq.size() == 0 && unacked.size() > 3 && $urandom_range(3) == 0) begin
      cmp_valid = 1; cmp_ctrl = unacked[0].ctrl;
      void'(unacked.pop_front());
    end
    // the double buffer sometimes refuses cells for a while
    if (w_done || (!w_ready && $urandom_range(30) != 0)) begin
      w_ready = $urandom_range(3) != 0;
      if (!w_ready) n_stall++;
    end else w_ready = 1;
  end

  task automatic wait_clocks(int n); repeat (n) @(negedge clk); endtask

  task automatic start_msg(int c, int base, int len, int b);
    @(negedge clk);
    msg_base[c] = AW'(base); msg_len[c] = 16'(len); msg_buf[c] = 4'(b); msg_go[c] = 1;
    @(negedge clk);
    msg_go[c] = 0;
  endtask

  task automatic timeout_now();
    // stop acknowledging, reload the sequence counter from the oldest
    // unacknowledged cell and queue all unacknowledged cells
    hold_acks = 1;
    @(negedge clk);
    rt_busy = 1;
    wait_clocks(unacked.size() + 2);
    if (unacked.size() > 0) tx_seq = 16'(unacked[0].seq);
    foreach (unacked[i]) rtq.push_back(unacked[i]);
    rt_busy = 0;
    while (rtq.size() != 0) @(negedge clk);
    hold_acks = 0;
  endtask

  initial begin : main
    int t_irq;
    enable = 0; msg_go = 0; msg_base = '0; msg_len = '{16'd1, 16'd1}; msg_buf = '0;
    trig_go = 0; initw_go = 0; initw_data = 32'hC0DE_0007; grant = '0;
    for (int k = 0; k < TRIG_WORDS; k++) trig_data[k] = $urandom;
    fc_word = '{32'hAAAA_5555, 32'h1234_8765}; rx_next = 16'h0042;
    for (int k = 0; k < 6; k++) err_cnt[k] = 16'(k * 3 + 1);
    rt_busy = 0; cmp_ctrl = '0; cmp_valid = 0; tx_seq = 16'hFFF0; w_ready = 1;
    expect_off = '{0, 0};
    grant_seen_before_start = '{0, 0};
    wait_clocks(3);
    rst_n = 1;
    wait_clocks(5);
    chk(!w_en, "no cells while not enabled");
    enable = 1;
    wait_clocks(2000);
    chk(n_noop > 0, "no-op cells when idle");

    // 1. a sync message waits for its grant
    start_msg(0, 100, 12, 5);
    wait_clocks(3000);
    chk(expect_off[0] == 0 && msg_busy[0], "sync message held back without a grant");
    grant_seen_before_start[0] = 1;
    grant[0][5] = 1'b1;
    while (msg_busy[0]) @(negedge clk);
    chk(expect_off[0] == 0, "sync message complete");

    // 2. long async message, preempted by a sync message
    grant[1] = '1; grant[0] = '1; grant_seen_before_start[1] = 1;
    start_msg(1, 1000, 41, 9);
    while (expect_off[1] < 10) @(negedge clk);
    start_msg(0, 2000, 9, 2);
    while (msg_busy[0]) @(negedge clk);
    chk(msg_busy[1] && expect_off[1] > 0, "async message still running after the sync one");
    while (msg_busy[1]) @(negedge clk);

    // 3. trigger during a message; init write
    start_msg(1, 3000, 30, 3);
    wait_clocks(1500);
    @(negedge clk); trig_go = 1; msg_since_trig = 0;
    @(negedge clk); trig_go = 0;
    while (trig_busy) @(negedge clk);
    chk(trig_wait >= 0 && trig_wait <= 1, $sformatf("trigger waited for %0d message cells", trig_wait));
    msg_since_trig = -1;
    @(negedge clk); initw_go = 1;
    @(negedge clk); initw_go = 0;
    while (initw_busy) @(negedge clk);

    // 4. timeouts in the middle of messages
    wait_clocks(1000);
    timeout_now();
    start_msg(0, 700, 20, 11);
    wait_clocks(2500);
    timeout_now();
    while (msg_busy != 0) @(negedge clk);
    wait_clocks(3000);

    // 5. random traffic with random timeouts
    for (int r = 0; r < 20; r++) begin
      if (!msg_busy[0] && $urandom_range(1)) start_msg(0, $urandom_range(3000), 1 + $urandom_range(25), $urandom_range(15));
      if (!msg_busy[1] && $urandom_range(1)) start_msg(1, $urandom_range(3000), 1 + $urandom_range(25), $urandom_range(15));
      if (!trig_busy && $urandom_range(3) == 0) begin @(negedge clk); trig_go = 1; @(negedge clk); trig_go = 0; end
      wait_clocks($urandom_range(4000));
      if ($urandom_range(2) == 0) timeout_now();
    end
    while (msg_busy != 0 || trig_busy) @(negedge clk);
    wait_clocks(3000);

    $display("cells %0d noop %0d trig %0d retx %0d preempt %0d stalls %0d initw %0d irq %0d fc_done %0d",
             n_cells, n_noop, n_trig, n_retx, n_preempt, n_stall, n_initw, n_irq, n_fcdone);
    chk(n_trig > 0 && n_retx > 0 && n_preempt > 0 && n_stall > 0 && n_initw > 0, "every mechanism exercised");
    chk(n_irq == n_fcdone && n_irq > 0, "message completions");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
