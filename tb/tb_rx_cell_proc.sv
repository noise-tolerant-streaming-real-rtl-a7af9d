// tb_rx_cell_proc: feeds the third receive stage with decoded cells from a
// model of the far-end transmitter and compares every output with a
// reference model of the receive rules.
// The transmitter sends sync and async messages (1..12 chunks, random
// buffers), trigger cells, no-op cells and init-register writes, with
// go-back-N behaviour: a cell can be lost (never presented) or arrive with
// an uncorrectable block (tag set, header garbled); the next two cells then
// arrive out of sequence and the transmitter goes back to the lost one.
// The far end's next-expected field sometimes jumps. Timeout pulses arrive
// at random. Checked: each memory write (address and data), rx_irq/rx_last
// with buffer number and length register, acknowledgement fields and
// flow-control words, init-register writes, the trigger pattern, rx_next and
// all six counters at the end.
module tb_rx_cell_proc;
  import link_pkg::*;
  localparam int AW = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic r_avail = 0, r_done, timeout_evt = 0;
  logic [8:0] r_addr;
  logic [7:0] r_data;
  rx_tag_t r_tag;
  logic [15:0] rx_next, ack_next;
  logic [5:0][15:0] err_cnt;
  logic ack_valid, rx_last, rx_circ, init_wr, trig_rx, mem_wr_en;
  logic [1:0][31:0] far_fc;
  logic [3:0] rx_buf, rx_irq_buf;
  logic [31:0] init_wdata, mem_wr_data;
  logic [TRIG_WORDS-1:0][31:0] trig_rx_data;
  logic [1:0][NBUF-1:0][AW-1:0] rx_base;
  logic [1:0][NBUF-1:0][15:0] rx_len;
  logic [1:0] rx_irq;
  logic [AW-1:0] mem_wr_addr;

  rx_cell_proc #(.AW(AW)) dut (.clk, .rst_n, .clear(1'b0), .*);

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

  // ---- the cell being presented ----
  logic [7:0] cb [DATA_BYTES];
  always_ff @(posedge clk) r_data <= cb[r_addr];

  // ---- expected output events ----
  typedef struct { int kind; longint a; longint d; } ev_t;  // kind 0 mem, 1 irq, 2 ack, 3 init, 4 trig
  ev_t expq [$];
  int n_ev [5];

  function automatic void expect_ev(int kind, longint a, longint d);
    ev_t e; e.kind = kind; e.a = a; e.d = d; expq.push_back(e);
  endfunction

  task automatic got_ev(int kind, longint a, longint d);
    int i;
    i = -1;
    foreach (expq[k]) if (i < 0 && expq[k].kind == kind) i = k;
    n_ev[kind]++;
    if (i < 0) begin chk(0, $sformatf("unexpected event kind %0d a=%h d=%h", kind, a, d)); return; end
    chk(expq[i].a == a && expq[i].d == d,
        $sformatf("event kind %0d: got a=%h d=%h expected a=%h d=%h", kind, a, d, expq[i].a, expq[i].d));
    expq.delete(i);
  endtask

  always @(posedge clk) if (rst_n) begin
    if (mem_wr_en) got_ev(0, longint'(mem_wr_addr), longint'(mem_wr_data));
    if (rx_irq != 0) begin
      chk(rx_last && rx_irq[rx_circ] && rx_buf == rx_irq_buf, "rx_irq and rx_last agree");
      got_ev(1, longint'({rx_circ, rx_buf}), 0);
    end
    if (ack_valid) got_ev(2, longint'(ack_next), longint'({far_fc[1], far_fc[0]}));
    if (init_wr) got_ev(3, 0, longint'(init_wdata));
    if (trig_rx) got_ev(4, 0, longint'(trig_rx_data[0] ^ trig_rx_data[TRIG_WORDS-1]));
  end

  // ---- reference model state ----
  int m_next = 0, m_prev_ack = 0;
  int m_cnt [6];
  int m_prev_off [2];
  int m_addr [2];
  int m_len [2][NBUF];
  logic [TRIG_WORDS-1:0][31:0] m_trig;

  typedef struct {
    ctrl_t ctrl; int off; int seq; int ack; logic [31:0] w1; logic [1:0][31:0] fc;
    logic [31:0] pay [80];
  } tcell_t;

  // present one cell and run it through the reference model
  task automatic present(tcell_t c, rx_tag_t tag);
    logic [31:0] hw [8];
    hw[0] = {16'(c.ctrl), 16'(c.off)}; hw[1] = c.w1; hw[2] = c.fc[0]; hw[3] = c.fc[1];
    hw[4] = {16'(c.seq), 16'(c.ack)}; hw[5] = $urandom; hw[6] = $urandom; hw[7] = $urandom;
    for (int k = 0; k < 32; k++) cb[RS_K * k] = hw[k / 4][8*(3 - k % 4) +: 8];
    for (int d = 0; d < PAY_BYTES; d++) cb[RS_K*(d/10) + 1 + d%10] = c.pay[d/4][8*(3 - d%4) +: 8];
    if (tag.rs_uncorr != 0) for (int k = 0; k < 32; k++) if ($urandom_range(3) == 0) cb[RS_K * k] = $urandom;
    // reference model
    m_cnt[0] += tag.err_8b10b; m_cnt[1] += tag.rs_corr; m_cnt[2] += tag.rs_uncorr;
    if (tag.rs_uncorr == 0) begin
      expect_ev(2, longint'(c.ack), longint'({c.fc[1], c.fc[0]}));
      if (16'(c.ack - m_prev_ack) != 16'd1) m_cnt[5]++;
      m_prev_ack = c.ack;
      if (16'(c.seq) != 16'(m_next)) m_cnt[3]++;
      else begin
        int ci, nch;
        m_next++;
        if (c.ctrl.init_we) expect_ev(3, 0, longint'(c.w1));
        ci = c.ctrl.circuit == CIRC_ASYNC;
        if (c.ctrl.circuit == CIRC_SYNC || c.ctrl.circuit == CIRC_ASYNC) begin
          nch = 16'(c.off - (c.ctrl.first ? 0 : m_prev_off[ci]));
          if (nch > CELL_CHUNKS) nch = CELL_CHUNKS;
          m_prev_off[ci] = c.off;
          if (c.ctrl.first) m_addr[ci] = int'(rx_base[ci][c.ctrl.buf_no]);
          for (int w = 0; w < nch * 16; w++) begin
            expect_ev(0, longint'(m_addr[ci] & ((1 << AW) - 1)), longint'(c.pay[w]));
            m_addr[ci]++;
          end
          if (c.ctrl.last) begin
            expect_ev(1, longint'({ci[0], c.ctrl.buf_no}), 0);
            m_len[ci][c.ctrl.buf_no] = c.off;
          end
        end else if (c.ctrl.circuit == CIRC_TRIG) begin
          for (int k = 0; k < TRIG_WORDS; k++) m_trig[k] = c.pay[k];
          expect_ev(4, 0, longint'(m_trig[0] ^ m_trig[TRIG_WORDS-1]));
        end
      end
    end
    @(negedge clk);
    r_tag = tag; r_avail = 1;
    @(posedge clk);
    while (!r_done) @(posedge clk);
    @(negedge clk);
    r_avail = 0;
    repeat ($urandom_range(3)) @(negedge clk);
  endtask

  // ---- far-end transmitter model ----
  tcell_t sent [$];           // cells sent, not yet known to be received
  int t_seq = 0, t_ack = 0;
  int msg_off [2], msg_len [2];
  int n_lost = 0, n_uncorr = 0, n_msgs_done = 0;

  function automatic tcell_t new_cell();
    tcell_t c;
    int ci;
    c.ctrl = '0; c.off = 0; c.seq = t_seq; c.w1 = $urandom;
    c.fc[0] = $urandom; c.fc[1] = $urandom;
    for (int w = 0; w < 80; w++) c.pay[w] = $urandom;
    t_seq++;
    if ($urandom_range(15) == 0) c.ctrl.init_we = 1;
    case ($urandom_range(9))
      0: c.ctrl.circuit = CIRC_NOOP;
      1: c.ctrl.circuit = CIRC_TRIG;
      default: begin
        ci = $urandom_range(1);
        c.ctrl.circuit = ci ? CIRC_ASYNC : CIRC_SYNC;
        if (msg_off[ci] == 0) msg_len[ci] = 1 + $urandom_range(11);
        c.ctrl.first = msg_off[ci] == 0;
        c.ctrl.buf_no = 4'(ci * 5 + msg_len[ci]);
        c.off = (msg_len[ci] - msg_off[ci] > CELL_CHUNKS) ? msg_off[ci] + CELL_CHUNKS : msg_len[ci];
        c.ctrl.last = c.off == msg_len[ci];
        msg_off[ci] = c.ctrl.last ? 0 : c.off;
      end
    endcase
    return c;
  endfunction

  initial begin : main
    rx_tag_t tag;
    tcell_t c;
    int i_tx;
    for (int ci = 0; ci < 2; ci++)
      for (int b = 0; b < NBUF; b++) rx_base[ci][b] = AW'(ci * 8192 + b * 256);
    m_cnt = '{0, 0, 0, 0, 0, 0}; m_prev_off = '{0, 0}; m_addr = '{0, 0};
    msg_off = '{0, 0}; msg_len = '{1, 1}; n_ev = '{0, 0, 0, 0, 0};
    for (int k = 0; k < DATA_BYTES; k++) cb[k] = 0;
    r_tag = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // The transmitter resends from the first unreceived cell; the receiver
    // state decides what is accepted, exactly like go-back-N on the link.
    // Messages are only generated fresh, so a resent cell is identical.
    i_tx = 0;
    for (int n = 0; n < 600; n++) begin
      int fate;
      if (i_tx == sent.size()) sent.push_back(new_cell());
      c = sent[i_tx];
      t_ack = ($urandom_range(20) == 0) ? t_ack + 3 : t_ack + 1;
      c.ack = t_ack;
      fate = $urandom_range(19);
      tag = '0;
      tag.err_8b10b = 8'($urandom_range(2) == 0 ? $urandom_range(5) : 0);
      tag.rs_corr = 6'($urandom_range(3) == 0 ? $urandom_range(4) : 0);
      if (fate == 0) begin
        n_lost++;                                  // lost on the wire
      end else begin
        if (fate == 1) begin tag.rs_uncorr = 6'(1 + $urandom_range(2)); n_uncorr++; end
        present(c, tag);
      end
      if ($urandom_range(7) == 0) begin
        @(negedge clk); timeout_evt = 1; m_cnt[4]++;
        @(negedge clk); timeout_evt = 0;
      end
      i_tx++;
      // the transmitter learns the receiver's position a few cells later and
      // goes back if something was missed
      if (i_tx - (m_next - sent[0].seq) >= 3) begin
        while (sent.size() > 0 && sent[0].seq < m_next) void'(sent.pop_front());
        i_tx = 0;
      end else begin
        while (sent.size() > 0 && sent[0].seq < m_next && i_tx > 0) begin
          void'(sent.pop_front());
          i_tx--;
        end
      end
    end
    repeat (20) @(negedge clk);
    chk(expq.size() == 0, $sformatf("%0d expected events never happened", expq.size()));
    chk(int'(rx_next) == (m_next & 16'hFFFF), "rx_next");
    for (int k = 0; k < 6; k++)
      chk(int'(err_cnt[k]) == m_cnt[k], $sformatf("counter %0d: %0d, expected %0d", k, err_cnt[k], m_cnt[k]));
    for (int ci = 0; ci < 2; ci++)
      for (int b = 0; b < NBUF; b++)
        chk(int'(rx_len[ci][b]) == m_len[ci][b], "length register");
    $display("writes %0d irqs %0d acks %0d init %0d trig %0d lost %0d uncorr %0d seqerr %0d",
             n_ev[0], n_ev[1], n_ev[2], n_ev[3], n_ev[4], n_lost, n_uncorr, m_cnt[3]);
    chk(n_ev[1] > 20 && n_ev[3] > 0 && n_ev[4] > 0 && m_cnt[3] > 0 && n_uncorr > 0, "every case exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
