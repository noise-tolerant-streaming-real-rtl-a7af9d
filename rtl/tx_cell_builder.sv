// tx_cell_builder: first transmit stage - cell scheduling, message
// segmentation, DMA read of message data and header assembly.
//
// For every cell it decides what the cell carries, in this order:
//   1. the next cell queued for retransmission after a timeout (same control
//      field, sequence number and payload as the original);
//   2. the trigger pattern, if its transmission is requested and no copy is
//      awaiting acknowledgement;
//   3. the next segment of the beam-synchronous message;
//   4. the next segment of the beam-asynchronous message;
//   5. otherwise a no-op cell (header only).
// A message circuit starts a message only while flow control grants the
// destination buffer. Each cell carries up to five 64-byte chunks (320 bytes),
// so a higher-priority message interrupts a lower-priority one between cells.
// The far-end link-initialisation write rides on any new cell (init_we bit,
// data in header longword 1) until acknowledged. Completions come back from
// retx_timeout: an acknowledged last cell ends the message (msg_irq, flow
// control acq), an acknowledged trigger cell or init write ends that request.
//
// Cell layout written into the first double buffer (block-major, byte
// 11*b+p): symbol 0 of block b is header byte b, symbols 1..10 are payload
// bytes 10b..10b+9. Header longwords, most significant byte first:
//   0 {control[15:0], data offset[15:0]}  1 far-end init register data
//   2 flow control, sync circuit          3 flow control, async circuit
//   4 {tx sequence, next expected rx sequence}
//   5..7 the six error counters, two per longword.
// Message memory is read as 32-bit words, most significant byte first, with
// one clock of read latency; one word feeds four payload bytes. A cell takes
// about 435 clocks, inside the 608-clock cell time.
// The priority order, circuit set, header layout and segmentation follow the
// paper; one outstanding message per circuit, the word-wide memory port and
// the trigger pattern length (TRIG_WORDS longwords) are this design's choices.
// Lint notes: only some bits of the completed cell's control field
// (circuit, last, init_we, buffer) and of the current cell's (circuit) are
// needed; the rest are unused by design.
module tx_cell_builder
  import link_pkg::*;
#(
  parameter int AW = 20   // message memory word address width
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        enable,      // link initialised
  // message requests, [0] = sync, [1] = async
  input  logic [1:0]                  msg_go,
  input  logic [1:0][AW-1:0]          msg_base,
  input  logic [1:0][15:0]            msg_len,     // 64-byte chunks, >= 1
  input  logic [1:0][3:0]             msg_buf,
  output logic [1:0]                  msg_busy,
  output logic [1:0]                  msg_irq,
  // trigger pattern
  input  logic                        trig_go,
  input  logic [TRIG_WORDS-1:0][31:0] trig_data,
  output logic                        trig_busy,
  // far-end link initialisation register write
  input  logic                        initw_go,
  input  logic [31:0]                 initw_data,
  output logic                        initw_busy,
  // flow control
  input  logic [1:0][NBUF-1:0]        grant,
  output logic                        fc_tx_done,
  output logic                        fc_tx_circ,
  output logic [3:0]                  fc_tx_buf,
  input  logic [1:0][31:0]            fc_word,
  // header status from the receive side
  input  logic [15:0]                 rx_next,
  input  logic [5:0][15:0]            err_cnt,
  // retx_timeout
  input  logic [15:0]                 tx_seq,
  output logic                        push,
  output ctrl_t                       push_ctrl,
  output logic [15:0]                 push_off,
  input  logic                        rt_valid,
  input  ctrl_t                       rt_ctrl,
  input  logic [15:0]                 rt_off,
  output logic                        rt_pop,
  input  logic                        rt_busy,
  input  logic                        cmp_valid,
  input  ctrl_t                       cmp_ctrl,
  // message memory read port
  output logic                        mem_rd_en,
  output logic [AW-1:0]               mem_rd_addr,
  input  logic [31:0]                 mem_rd_data,
  // first transmit double buffer, write side
  input  logic                        w_ready,
  output logic                        w_en,
  output logic [8:0]                  w_addr,
  output logic [7:0]                  w_data,
  output logic                        w_done
);
  typedef enum logic [2:0] {B_IDLE, B_DECIDE, B_HDR, B_PAY, B_PAYWAIT, B_DONE} bstate_e;
  bstate_e st;

  // request state
  logic [1:0]        msg_act;
  logic [1:0][15:0]  msg_sent;     // chunks already segmented
  logic              trig_pend, trig_infl, initw_pend, initw_infl;

  // current cell
  ctrl_t             c_ctrl;
  logic [8:0]        c_nbytes;     // payload bytes from the source
  logic [AW-1:0]     c_addr;
  logic [7:0][31:0]  hdr;
  logic [8:0]        j;            // header / payload byte index
  logic [31:0]       word;

  // ---- cell decision (combinational, used in B_DECIDE) ----
  ctrl_t       n_ctrl;
  logic [15:0] n_off_excl, n_chunks;
  logic        n_retx, n_msg;
  logic        n_c;
  always_comb begin
    n_ctrl     = '0;
    n_off_excl = '0;
    n_chunks   = '0;
    n_retx     = 1'b0;
    n_msg      = 1'b0;
    n_c        = 1'b0;
    if (rt_valid) begin
      n_retx     = 1'b1;
      n_ctrl     = rt_ctrl;
      n_off_excl = rt_off;
      n_c        = rt_ctrl.circuit == CIRC_ASYNC;
      n_msg      = rt_ctrl.circuit == CIRC_SYNC || rt_ctrl.circuit == CIRC_ASYNC;
      n_chunks   = rt_ctrl.last ? msg_len[n_c] - rt_off : 16'(CELL_CHUNKS);
    end else if (trig_pend && !trig_infl) begin
      n_ctrl.circuit = CIRC_TRIG;
    end else begin
      for (int c = 1; c >= 0; c--) begin
        if (msg_act[c] && msg_sent[c] != msg_len[c] &&
            (msg_sent[c] != 0 || grant[c][msg_buf[c]])) begin
          n_msg          = 1'b1;
          n_c            = c[0];
          n_ctrl.circuit = (c == 1) ? CIRC_ASYNC : CIRC_SYNC;
          n_ctrl.buf_no  = msg_buf[c];
          n_off_excl     = msg_sent[c];
          n_chunks       = (msg_len[c] - msg_sent[c] > 16'(CELL_CHUNKS)) ? 16'(CELL_CHUNKS)
                                                                         : msg_len[c] - msg_sent[c];
          n_ctrl.first   = msg_sent[c] == 0;
          n_ctrl.last    = msg_sent[c] + n_chunks == msg_len[c];
        end
      end
    end
    if (!n_retx && initw_pend && !initw_infl) n_ctrl.init_we = 1'b1;
  end

  logic [7:0] hbyte;
  assign hbyte = hdr[j[4:2]][8*(3 - int'(j[1:0])) +: 8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= B_IDLE;
      msg_act    <= '0;
      msg_sent   <= '0;
      msg_irq    <= '0;
      trig_pend  <= 1'b0;
      trig_infl  <= 1'b0;
      initw_pend <= 1'b0;
      initw_infl <= 1'b0;
      c_ctrl     <= '0;
      c_nbytes   <= '0;
      c_addr     <= '0;
      hdr        <= '0;
      j          <= '0;
      word       <= '0;
      fc_tx_done <= 1'b0;
      fc_tx_circ <= 1'b0;
      fc_tx_buf  <= '0;
    end else begin
      msg_irq    <= '0;
      fc_tx_done <= 1'b0;
      case (st)
        B_IDLE: if (enable && w_ready && !rt_busy) st <= B_DECIDE;
        B_DECIDE: begin
          if (rt_busy) begin
            st <= B_IDLE;
          end else begin
            c_ctrl     <= n_ctrl;
            c_nbytes   <= n_msg ? 9'(n_chunks * 16'(CHUNK_BYTES))
                                : (n_ctrl.circuit == CIRC_TRIG) ? 9'(4 * TRIG_WORDS) : 9'd0;
            c_addr     <= msg_base[n_c] + AW'({n_off_excl, 4'b0000});
            if (!n_retx && n_ctrl.circuit == CIRC_TRIG) trig_infl <= 1'b1;
            if (!n_retx && n_msg) msg_sent[n_c] <= msg_sent[n_c] + n_chunks;
            if (n_ctrl.init_we && !n_retx) initw_infl <= 1'b1;
            hdr[0] <= {16'(n_ctrl), n_off_excl + n_chunks};
            hdr[1] <= initw_data;
            hdr[2] <= fc_word[0];
            hdr[3] <= fc_word[1];
            hdr[4] <= {tx_seq, rx_next};
            hdr[5] <= {err_cnt[0], err_cnt[1]};
            hdr[6] <= {err_cnt[2], err_cnt[3]};
            hdr[7] <= {err_cnt[4], err_cnt[5]};
            j  <= '0;
            st <= B_HDR;
          end
        end
        B_HDR: begin
          j <= j + 9'd1;
          if (j == 9'(HDR_BYTES - 1)) begin
            j  <= '0;
            st <= B_PAY;
          end
        end
        B_PAY: begin
          if (j[1:0] == 2'd0 && j < c_nbytes) begin
            st <= B_PAYWAIT;   // word read issued this clock
          end else begin
            j <= j + 9'd1;
            if (j == 9'(PAY_BYTES - 1)) st <= B_DONE;
          end
        end
        B_PAYWAIT: begin
          word <= (c_ctrl.circuit == CIRC_TRIG) ? trig_data[j[4:2]] : mem_rd_data;
          j    <= j + 9'd1;
          st   <= B_PAY;
        end
        B_DONE: st <= B_IDLE;
        default: st <= B_IDLE;
      endcase

      // new requests
      for (int c = 0; c < 2; c++)
        if (msg_go[c] && !msg_act[c]) begin
          msg_act[c]  <= 1'b1;
          msg_sent[c] <= '0;
        end
      if (trig_go) trig_pend <= 1'b1;
      if (initw_go) initw_pend <= 1'b1;

      // completions reported by the acknowledgement logic
      if (cmp_valid) begin
        if (cmp_ctrl.circuit == CIRC_TRIG) begin
          trig_pend <= 1'b0;
          trig_infl <= 1'b0;
        end
        if (cmp_ctrl.init_we) begin
          initw_pend <= 1'b0;
          initw_infl <= 1'b0;
        end
        if (cmp_ctrl.last && (cmp_ctrl.circuit == CIRC_SYNC || cmp_ctrl.circuit == CIRC_ASYNC)) begin
          msg_act[cmp_ctrl.circuit == CIRC_ASYNC]  <= 1'b0;
          msg_irq[cmp_ctrl.circuit == CIRC_ASYNC]  <= 1'b1;
          fc_tx_done <= 1'b1;
          fc_tx_circ <= cmp_ctrl.circuit == CIRC_ASYNC;
          fc_tx_buf  <= cmp_ctrl.buf_no;
        end
      end
    end
  end

  assign msg_busy   = msg_act;
  assign trig_busy  = trig_pend;
  assign initw_busy = initw_pend;

  assign push      = st == B_DECIDE && !rt_busy;
  assign push_ctrl = n_ctrl;
  assign push_off  = n_off_excl;
  assign rt_pop    = push && n_retx;

  // memory read for the word that starts at payload byte j
  assign mem_rd_en   = st == B_PAY && j[1:0] == 2'd0 && j < c_nbytes && c_ctrl.circuit != CIRC_TRIG;
  assign mem_rd_addr = c_addr + AW'(j >> 2);

  // buffer writes
  always_comb begin
    w_en   = 1'b0;
    w_addr = '0;
    w_data = '0;
    if (st == B_HDR) begin
      w_en   = 1'b1;
      w_addr = 9'(RS_K * int'(j));
      w_data = hbyte;
    end else if ((st == B_PAY && !(j[1:0] == 2'd0 && j < c_nbytes)) || st == B_PAYWAIT) begin
      w_en   = 1'b1;
      w_addr = 9'(RS_K * (int'(j) / 10) + 1 + int'(j) % 10);
      if (j >= c_nbytes) w_data = 8'h00;
      else if (st == B_PAYWAIT) w_data = (c_ctrl.circuit == CIRC_TRIG) ? trig_data[j[4:2]][31:24]
                                                                        : mem_rd_data[31:24];
      else w_data = word[8*(3 - int'(j[1:0])) +: 8];
    end
  end
  assign w_done = st == B_DONE;
endmodule
