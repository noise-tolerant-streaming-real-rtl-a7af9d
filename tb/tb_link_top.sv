// tb_link_top: end-to-end test of two link ends (A = 0, B = 1) at full size
// (default parameters: 20-bit word addresses, 20-cell timeout, 32 in-flight
// cells) joined by a model of the fibre in each direction.
//
// Channel model: the sending end's 10-bit symbols are serialised (bit 9
// first); the receiving end gets 20-bit words on a recovered clock at half
// the sender's symbol rate, taken at a bit offset that is not a symbol
// boundary, so the comma aligner has to find the framing. Noise comes in
// bursts that invert random bits: short bursts (up to 30 symbols, which the
// Reed-Solomon code must correct) and, in one phase, long bursts (up to 700
// symbols) that destroy whole cells and force go-back-N recovery. End B's
// clock runs slightly slow (one stretched cycle in 1000).
//
// Each end's processor model brings the link up through the initialisation
// register, arms all receive buffers, sends sync and async messages from its
// own memory pattern to random far buffers (only a few buffer numbers, so
// flow control has to hold messages back while the far processor is slow to
// re-arm), sends trigger patterns and, on A, writes B's initialisation
// register over the link. On every rx_irq the received buffer is compared
// word by word with what the far end sent and the length register checked.
// At the end every message must have arrived exactly once, and each
// mechanism must have happened at least once: RS corrections, an
// uncorrectable cell, a sequence error, a timeout with retransmission, a
// flow-control stall, sync preempting async between cells, a trigger
// pattern, a far-end init-register write and transmit buffer backpressure.
// Each message asks for a completion interrupt at random; the count of
// msg_irq pulses must equal the count requested.
module tb_link_top;
  import link_pkg::*;
  localparam int AW = 20;
  localparam int NMSG = 14;         // messages per end

  logic [1:0] clk, rst_n, rx_clk;
  logic [1:0][9:0] tx_sym;
  logic [1:0][19:0] rx_word;
  logic [1:0] init_wr, far_init_go, far_init_busy, trig_go, trig_busy, trig_rx;
  logic [1:0][31:0] init_wdata, init_reg, far_init_data;
  logic [1:0][1:0] msg_go, msg_busy, msg_irq, rx_irq;
  logic [1:0][1:0][AW-1:0] msg_base;
  logic [1:0][1:0][15:0] msg_len;
  logic [1:0][1:0][3:0] msg_buf;
  logic [1:0][TRIG_WORDS-1:0][31:0] trig_data, trig_rx_data;
  logic [1:0][1:0][NBUF-1:0] rx_arm;
  logic [1:0][1:0] msg_irq_en;
  logic [1:0][15:0] timeout_cells;
  logic [1:0][1:0][NBUF-1:0] rx_irq_en;
  int n_mirq [2], n_mirq_exp [2], n_mirq_off [2];   // completion interrupts
  logic [1:0][1:0][NBUF-1:0][AW-1:0] rx_base;
  logic [1:0][1:0][NBUF-1:0][15:0] rx_len;
  logic [1:0][3:0] rx_irq_buf;
  logic [1:0] mem_rd_en, mem_wr_en;
  logic [1:0][AW-1:0] mem_rd_addr, mem_wr_addr;
  logic [1:0][31:0] mem_rd_data, mem_wr_data;
  logic [1:0][15:0] tx_seq, rx_next;
  logic [1:0][5:0][15:0] err_cnt;
  logic [1:0] rx_locked, rx_framed, tx_sending, tx_underflow, rx_overrun;

  int checks = 0, failures = 0;
  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %0t %s", $time, msg); end
  endtask

  for (genvar e = 0; e < 2; e++) begin : g_end
    link_top u (
      .clk(clk[e]), .rst_n(rst_n[e]), .rx_clk(rx_clk[e]), .rx_rst_n(rst_n[e]),
      .tx_sym(tx_sym[e]), .rx_word(rx_word[e]),
      .init_wr(init_wr[e]), .init_wdata(init_wdata[e]), .init_reg(init_reg[e]),
      .far_init_go(far_init_go[e]), .far_init_data(far_init_data[e]), .far_init_busy(far_init_busy[e]),
      .msg_go(msg_go[e]), .msg_base(msg_base[e]), .msg_len(msg_len[e]), .msg_buf(msg_buf[e]),
      .msg_busy(msg_busy[e]), .msg_irq(msg_irq[e]), .msg_irq_en(msg_irq_en[e]), .timeout_cells(timeout_cells[e]), .rx_irq_en(rx_irq_en[e]),
      .trig_go(trig_go[e]), .trig_data(trig_data[e]), .trig_busy(trig_busy[e]),
      .rx_arm(rx_arm[e]), .rx_base(rx_base[e]), .rx_len(rx_len[e]), .rx_irq(rx_irq[e]),
      .rx_irq_buf(rx_irq_buf[e]), .trig_rx(trig_rx[e]), .trig_rx_data(trig_rx_data[e]),
      .mem_rd_en(mem_rd_en[e]), .mem_rd_addr(mem_rd_addr[e]), .mem_rd_data(mem_rd_data[e]),
      .mem_wr_en(mem_wr_en[e]), .mem_wr_addr(mem_wr_addr[e]), .mem_wr_data(mem_wr_data[e]),
      .tx_seq(tx_seq[e]), .rx_next(rx_next[e]), .err_cnt(err_cnt[e]),
      .rx_locked(rx_locked[e]), .rx_framed(rx_framed[e]), .tx_sending(tx_sending[e]),
      .tx_underflow(tx_underflow[e]), .rx_overrun(rx_overrun[e])
    );
  end

  // ---------------- clocks ----------------
  initial begin
    clk = '0;
    fork
      forever #4 clk[0] = ~clk[0];
      forever begin
        repeat (999) begin #4 clk[1] = 1; #4 clk[1] = 0; end
        #5 clk[1] = 1; #4 clk[1] = 0;
      end
    join
  end

  initial forever begin
    #1000000;
    $display("DBG %0t up %0d%0d lock %b framed %b init %h/%h seq %0d/%0d next %0d/%0d rx %0d/%0d sent %0d/%0d err %p busy %b%b",
      $time, up[0], up[1], rx_locked, rx_framed, init_reg[0], init_reg[1], tx_seq[0], tx_seq[1], rx_next[0], rx_next[1],
      n_rx[0], n_rx[1], n_sent[0], n_sent[1], err_cnt, msg_busy[0], msg_busy[1]);
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- channel model ----------------
  int burst_max [2];        // longest burst, symbols; 0 = quiet
  int burst_rate [2];       // one burst start per this many symbols
  int n_bursts [2];
  int bit_off [2] = '{13, 7};
  for (genvar e = 0; e < 2; e++) begin : g_chan
    // direction e -> 1-e, clocked by the sender
    logic [39:0] hist = '0;
    logic        ph = 0;
    int          left = 0;
    logic [19:0] word_q = '0;
    always @(posedge clk[e]) begin
      logic [9:0] s;
      s = tx_sym[e];
      if (left > 0) begin
        s = s ^ 10'($urandom);
        left--;
      end else if (burst_max[e] > 0 && $urandom_range(burst_rate[e]) == 0) begin
        left = 1 + $urandom_range(burst_max[e] - 1);
        n_bursts[e]++;
      end
      hist = {hist[29:0], s};
      ph = ~ph;
      if (ph) begin
        word_q = hist[bit_off[e] +: 20];
        rx_clk[1-e] <= 1'b0;
      end else begin
        rx_word[1-e] <= word_q;
        rx_clk[1-e] <= 1'b1;
      end
    end
  end

  // ---------------- memories ----------------
  function automatic logic [31:0] src_word(int e, logic [AW-1:0] a);
    return ({12'(e + 1), a} * 32'h2545F491) ^ {a[7:0], 24'h5A3C96};
  endfunction
  logic [31:0] rxmem [2][int];
  for (genvar e = 0; e < 2; e++) begin : g_mem
    always @(posedge clk[e]) begin
      if (mem_rd_en[e]) mem_rd_data[e] <= src_word(e, mem_rd_addr[e]);
      if (mem_wr_en[e]) rxmem[e][int'(mem_wr_addr[e])] = mem_wr_data[e];
    end
  end

  // ---------------- bookkeeping ----------------
  typedef struct { int base; int len; } msgd_t;
  msgd_t expq [2][2][NBUF][$];      // [receiving end][circuit][buffer]
  int n_rx [2], n_sent [2];
  int n_trig_rx [2];
  logic [TRIG_WORDS-1:0][31:0] trig_sent [2];
  int n_timeout [2], n_rtpop [2], n_preempt [2], n_fcwait [2], n_bp [2], n_farwr [2];
  bit slow_arm [2];

  for (genvar e = 0; e < 2; e++) begin : g_mon
    always @(posedge clk[e]) if (rst_n[e]) begin
      if (g_end[e].u.timeout_evt) n_timeout[e]++;
      n_mirq[e] += $countones(msg_irq[e]);
      if (g_end[e].u.rt_pop) n_rtpop[e]++;
      if (g_end[e].u.far_wr) n_farwr[e]++;
      if (g_end[e].u.push && !g_end[e].u.rt_pop && g_end[e].u.push_ctrl.circuit == CIRC_SYNC &&
          g_end[e].u.u_build.msg_act[1] && g_end[e].u.u_build.msg_sent[1] != 0 &&
          g_end[e].u.u_build.msg_sent[1] != g_end[e].u.u_build.msg_len[1])
        n_preempt[e]++;
      for (int c = 0; c < 2; c++)
        if (msg_busy[e][c] && g_end[e].u.u_build.msg_sent[c] == 0 &&
            !g_end[e].u.grant[c][msg_buf[e][c]])
          n_fcwait[e]++;
      if (g_end[e].u.u_build.st == 0 && !g_end[e].u.b1_w_ready) n_bp[e]++;
      if (trig_rx[e]) begin
        chk(trig_rx_data[e] == trig_sent[1-e], "trigger pattern received");
        n_trig_rx[e]++;
      end
    end
  end

  // receiving processor: check each delivered message, re-arm the buffer
  task automatic rx_check(int e, int c, int b);
    msgd_t m;
    int bad;
    if (expq[e][c][b].size() == 0) begin
      chk(0, $sformatf("end %0d circuit %0d buffer %0d: message nobody sent", e, c, b));
      return;
    end
    m = expq[e][c][b].pop_front();
    chk(int'(rx_len[e][c][b]) == m.len, $sformatf("length register %0d, sent %0d", rx_len[e][c][b], m.len));
    bad = 0;
    for (int w = 0; w < m.len * 16; w++) begin
      int a;
      a = int'(rx_base[e][c][b]) + w;
      if (!rxmem[e].exists(a) || rxmem[e][a] !== src_word(1 - e, AW'(m.base + w))) bad++;
      rxmem[e].delete(a);
    end
    chk(bad == 0, $sformatf("end %0d circuit %0d buffer %0d: %0d bad words of %0d", e, c, b, bad, m.len * 16));
    n_rx[e]++;
  endtask

  for (genvar e = 0; e < 2; e++) begin : g_rxproc
    initial begin
      rx_arm[e] = '0;
      @(posedge rst_n[e]);
      repeat (5) @(negedge clk[e]);
      rx_arm[e] = '1;
      @(negedge clk[e]);
      rx_arm[e] = '0;
      forever begin
        @(negedge clk[e]);
        if (rx_irq[e] != 0) begin
          int c, b;
          c = int'(rx_irq[e][1]);
          b = int'(rx_irq_buf[e]);
          rx_check(e, c, b);
          fork
            begin
              int cc, bb;
              cc = c; bb = b;
              repeat (slow_arm[e] ? 4000 + $urandom_range(8000) : $urandom_range(50)) @(negedge clk[e]);
              rx_arm[e][cc][bb] = 1'b1;
              @(negedge clk[e]);
              rx_arm[e][cc][bb] = 1'b0;
            end
          join_none
        end
      end
    end
  end

  // transmitting processor
  task automatic send_msg(int e, int c, int len);
    int b, base;
    while (msg_busy[e][c]) @(negedge clk[e]);
    b = $urandom_range(2);                       // few buffers: forces waits
    base = $urandom_range(200000);
    expq[1-e][c][b].push_back('{base, len});
    msg_base[e][c] = AW'(base); msg_len[e][c] = 16'(len); msg_buf[e][c] = 4'(b);
    msg_irq_en[e][c] = 1'($urandom_range(1));   // interrupt on completion?
    if (msg_irq_en[e][c]) n_mirq_exp[e]++; else n_mirq_off[e]++;
    msg_go[e][c] = 1;
    @(negedge clk[e]);
    msg_go[e][c] = 0;
    n_sent[e]++;
  endtask

  task automatic send_trig(int e);
    while (trig_busy[e]) @(negedge clk[e]);
    for (int k = 0; k < TRIG_WORDS; k++) trig_data[e][k] = $urandom;
    trig_sent[e] = trig_data[e];
    trig_go[e] = 1;
    @(negedge clk[e]);
    trig_go[e] = 0;
  endtask

  task automatic write_init(int e, logic [31:0] v);
    @(negedge clk[e]);
    init_wr[e] = 1; init_wdata[e] = v;
    @(negedge clk[e]);
    init_wr[e] = 0;
  endtask

  // link bring-up: send ordered sets until the far end's are seen, then
  // cells; B leaves comma alignment on for A to turn off remotely
  task automatic bring_up(int e);
    while (!rx_locked[e]) @(negedge clk[e]);
    repeat (200) @(negedge clk[e]);
    write_init(e, 32'h2);
    while (!rx_framed[e]) @(negedge clk[e]);
    if (e == 0) write_init(e, 32'h0);
  endtask

  bit up [2];
  for (genvar e = 0; e < 2; e++) begin : g_txproc
    initial begin
      msg_go[e] = '0; msg_base[e] = '0; msg_len[e] = '{16'd1, 16'd1}; msg_buf[e] = '0;
      trig_go[e] = 0; trig_data[e] = '0; init_wr[e] = 0; init_wdata[e] = '0;
      far_init_go[e] = 0; far_init_data[e] = '0;
      for (int c = 0; c < 2; c++)
        for (int b = 0; b < NBUF; b++) rx_base[e][c][b] = AW'(c * 400000 + b * 20000);
      @(posedge rst_n[e]);
      bring_up(e);
      up[e] = 1;
      while (!(up[0] && up[1])) @(negedge clk[e]);
      if (e == 0) begin
        // turn off B's comma alignment from here
        @(negedge clk[e]);
        far_init_go[e] = 1; far_init_data[e] = 32'h0;
        @(negedge clk[e]);
        far_init_go[e] = 0;
        while (far_init_busy[e]) @(negedge clk[e]);
      end
      for (int n = 0; n < NMSG / 2; n++) begin
        // a long async message, then a short sync one while it is running
        fork
          send_msg(e, 1, 15 + $urandom_range(25));
          begin
            repeat (1500 + $urandom_range(2000)) @(negedge clk[e]);
            send_msg(e, 0, 1 + $urandom_range(6));
          end
        join
        if (n % 3 == 1) send_trig(e);
        repeat ($urandom_range(3000)) @(negedge clk[e]);
      end
      while (msg_busy[e] != 0 || trig_busy[e]) @(negedge clk[e]);
    end
  end

  initial begin : main
    rst_n = '0;
    burst_max = '{0, 0}; burst_rate = '{1000, 1000}; n_bursts = '{0, 0};
    slow_arm = '{0, 0}; up = '{0, 0};
    msg_irq_en = '0; rx_irq_en = '1;
    timeout_cells = '{16'd20, 16'd20};   // the paper's 20 cell lengths
    n_mirq = '{0, 0}; n_mirq_exp = '{0, 0}; n_mirq_off = '{0, 0};
    n_rx = '{0, 0}; n_sent = '{0, 0}; n_trig_rx = '{0, 0};
    n_timeout = '{0, 0}; n_rtpop = '{0, 0}; n_preempt = '{0, 0};
    n_fcwait = '{0, 0}; n_bp = '{0, 0}; n_farwr = '{0, 0};
    trig_sent[0] = '0; trig_sent[1] = '0;
    #100;
    rst_n = '1;
    while (!(up[0] && up[1])) #1000;
    chk(init_reg[0] == 0, "A initialised");
    // noise only once comma re-alignment is off at both ends
    for (int w = 0; w < 500 && init_reg[1][1]; w++) #1000;
    chk(init_reg[1] == 0, "B's init register written by A");
    // phase 1: short bursts only, corrected by the RS code
    burst_max = '{30, 30}; burst_rate = '{3000, 3000};
    #1500000;
    // phase 2: long bursts too; B's processor slow to re-arm
    slow_arm = '{0, 1};
    burst_max = '{700, 700}; burst_rate = '{25000, 25000};
    #2500000;
    burst_max = '{30, 30}; burst_rate = '{3000, 3000};
    slow_arm = '{0, 0};
    while (n_rx[0] < NMSG || n_rx[1] < NMSG) #10000;
    burst_max = '{0, 0};
    #200000;
    for (int e = 0; e < 2; e++) begin
      $display("end %0d: sent %0d received %0d bursts-in %0d 8b10b %0d rs-corr %0d rs-uncorr %0d seq-err %0d timeouts %0d (counter %0d) resent %0d preempt %0d fc-wait %0d backpressure %0d trig %0d far-wr %0d",
               e, n_sent[e], n_rx[e], n_bursts[1-e], err_cnt[e][0], err_cnt[e][1], err_cnt[e][2], err_cnt[e][3],
               n_timeout[e], err_cnt[e][4], n_rtpop[e], n_preempt[e], n_fcwait[e], n_bp[e], n_trig_rx[e], n_farwr[e]);
      chk(n_rx[e] == NMSG, $sformatf("end %0d received %0d of %0d messages", e, n_rx[e], NMSG));
      for (int c = 0; c < 2; c++)
        for (int b = 0; b < NBUF; b++) chk(expq[e][c][b].size() == 0, "undelivered message");
      chk(!rx_overrun[e], "no receive overrun");
      chk(err_cnt[e][1] > 0, "RS correction happened");
      chk(n_preempt[e] > 0, "sync preempted async");
      chk(n_trig_rx[e] > 0, "trigger pattern delivered");
      chk(n_bp[e] > 0, "transmit buffer backpressure");
      chk(n_mirq[e] == n_mirq_exp[e], $sformatf("end %0d: %0d completion interrupts, %0d requested", e, n_mirq[e], n_mirq_exp[e]));
    end
    chk(err_cnt[0][2] + err_cnt[1][2] > 0, "uncorrectable cell");
    chk(err_cnt[0][3] + err_cnt[1][3] > 0, "sequence error");
    chk(n_timeout[0] + n_timeout[1] > 0 && n_rtpop[0] + n_rtpop[1] > 0, "timeout and retransmission");
    chk(n_fcwait[0] + n_fcwait[1] > 0, "flow-control stall");
    chk(n_farwr[1] > 0, "far-end init write");
    chk(n_mirq_off[0] + n_mirq_off[1] > 0, "message sent without completion interrupt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
