// tb_flow_ctrl: two flow-control blocks facing each other, as at the two ends
// of a link. Each end sends its header longwords to the other every 16
// clocks with a 40-clock delay, and about one header in eight is lost. Each
// end runs one message at a time per circuit to a granted far buffer; the
// last cell reaches the receiver 40 clocks after the message ends and its
// acknowledgement returns 40 clocks after that. The receiving processor
// re-arms a buffer after a random delay, sometimes immediately.
// Checks: a message never lands in a buffer that is not armed and empty
// (no overrun), and messages keep flowing on every circuit in both
// directions (no deadlock).
module tb_flow_ctrl;
  import link_pkg::*;
  localparam int LAT = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0][1:0][NBUF-1:0] arm;
  logic [1:0] rx_last, rx_circ, tx_done, tx_circ, far_valid;
  logic [1:0][3:0] rx_buf, tx_buf;
  logic [1:0][1:0][31:0] far_word, hdr_word;
  logic [1:0][1:0][NBUF-1:0] grant;

  for (genvar e = 0; e < 2; e++) begin : g_end
    flow_ctrl u (.clk, .rst_n, .clear(1'b0), .arm(arm[e]),
      .rx_last(rx_last[e]), .rx_circ(rx_circ[e]), .rx_buf(rx_buf[e]),
      .tx_done(tx_done[e]), .tx_circ(tx_circ[e]), .tx_buf(tx_buf[e]),
      .far_valid(far_valid[e]), .far_word(far_word[e]),
      .hdr_word(hdr_word[e]), .grant(grant[e]));
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  // event schedule: per destination end, time-stamped pulses
  typedef struct { longint t; int kind; int c; int b; logic [1:0][31:0] w; } ev_t;
  ev_t evq [2][$];
  longint now = 0;
  bit armed [2][2][NBUF];       // receiver view: buffer armed and empty
  int arm_at [2][2][NBUF];      // pending re-arm time, -1 if none
  int tx_busy_until [2][2];
  int tx_active_buf [2][2];
  int n_msgs [2][2];

  task automatic post(int dst, longint t, int kind, int c, int b, logic [1:0][31:0] w);
    ev_t e; e.t = t; e.kind = kind; e.c = c; e.b = b; e.w = w;
    evq[dst].push_back(e);
  endtask

  initial begin : main
    for (int e = 0; e < 2; e++)
      for (int c = 0; c < 2; c++) begin
        tx_busy_until[e][c] = 0; tx_active_buf[e][c] = -1; n_msgs[e][c] = 0;
        for (int b = 0; b < NBUF; b++) begin armed[e][c][b] = 0; arm_at[e][c][b] = 20 + b; end
      end
    arm = '0; rx_last = '0; rx_circ = '0; rx_buf = '0; tx_done = '0; tx_circ = '0;
    tx_buf = '0; far_valid = '0; far_word = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (60000) begin
      @(negedge clk);
      now++;
      arm = '0; rx_last = '0; tx_done = '0; far_valid = '0;
      for (int e = 0; e < 2; e++) begin
        // headers travel every 16 clocks, some are lost
        if (now % 16 == e * 8 && $urandom_range(7) != 0)
          post(1 - e, now + LAT, 0, 0, 0, hdr_word[e]);
        // processor re-arms buffers
        for (int c = 0; c < 2; c++)
          for (int b = 0; b < NBUF; b++)
            if (arm_at[e][c][b] >= 0 && arm_at[e][c][b] <= now && arm[e][c] == '0) begin
              arm[e][c][b] = 1'b1; armed[e][c][b] = 1; arm_at[e][c][b] = -1;
            end
        // transmitter: one message at a time per circuit
        for (int c = 0; c < 2; c++)
          if (tx_active_buf[e][c] < 0) begin
            int start, b, len;
            start = $urandom_range(NBUF - 1);
            for (int k = 0; k < NBUF; k++) begin
              b = (start + k) % NBUF;
              if (tx_active_buf[e][c] < 0 && grant[e][c][b]) begin
                len = 20 + $urandom_range(300);
                tx_active_buf[e][c] = b;
                post(1 - e, now + len + LAT, 1, c, b, '0);     // last cell arrives
                post(e, now + len + 2 * LAT, 2, c, b, '0);     // its acknowledgement
              end
            end
          end
      end
      // deliver due events, at most one of each kind per end per clock
      for (int e = 0; e < 2; e++) begin
        bit used [3];
        used = '{0, 0, 0};
        for (int i = 0; i < evq[e].size(); i++) begin
          ev_t v;
          v = evq[e][i];
          if (v.t <= now && !used[v.kind]) begin
            used[v.kind] = 1;
            case (v.kind)
              0: begin far_valid[e] = 1; far_word[e] = v.w; end
              1: begin
                rx_last[e] = 1; rx_circ[e] = v.c[0]; rx_buf[e] = 4'(v.b);
                chk(armed[e][v.c][v.b], $sformatf("end %0d circuit %0d buffer %0d overrun", e, v.c, v.b));
                armed[e][v.c][v.b] = 0;
                arm_at[e][v.c][v.b] = int'(now) + (($urandom_range(3) == 0) ? 0 : $urandom_range(2000));
              end
              2: begin
                tx_done[e] = 1; tx_circ[e] = v.c[0]; tx_buf[e] = 4'(v.b);
                tx_active_buf[e][v.c] = -1;
                n_msgs[e][v.c]++;
              end
              default: ;
            endcase
            evq[e].delete(i);
            i--;
          end
        end
      end
    end
    for (int e = 0; e < 2; e++)
      for (int c = 0; c < 2; c++) begin
        $display("end %0d circuit %0d messages %0d", e, c, n_msgs[e][c]);
        chk(n_msgs[e][c] > 50, $sformatf("end %0d circuit %0d progress", e, c));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
