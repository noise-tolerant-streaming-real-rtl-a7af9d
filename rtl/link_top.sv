// link_top: one end of the noise-tolerant streaming link.
//
// Transmit pipeline (local 125 MHz clock clk):
//   tx_cell_builder -> double buffer (352 B) -> rs_encoder -> double buffer
//   (608 B) -> tx_serial_stage -> tx_sym, one 10-bit symbol per clock to the
//   serializer.
// Receive pipeline:
//   rx_word, 20 bits per recovered 62.5 MHz clock rx_clk -> rx_deser_stage
//   -> double buffer (608 B) -> rx_rs_stage (8 decoders) -> clock-crossing
//   double buffer (352 B) -> rx_cell_proc on clk.
// retx_timeout keeps the in-flight cell descriptions and drives
// retransmission; flow_ctrl runs the per-buffer backpressure handshake.
//
// The 32-bit link initialisation register (reset value 3) is written by the
// local processor (init_wr) or by the far end (a cell with init_we):
//   bit 0  tx_init   send K28.5/D21.4 ordered sets instead of cells, and hold
//                    the cell builder;
//   bit 1  align_en  let the receiver re-align on commas (turn off once the
//                    link is up);
//   bit 2  clear     hold sequence numbers, FIFOs, flow control and error
//                    counters at zero.
// The bit assignment is this design's; the paper only says the register
// exists and that the far end can write it. The serializer/deserializer, the
// processor and the message memory are outside: their signals are ports.
// The last cell of a message interrupts the processor at either end only if
// that was requested (msg_irq_en with msg_go, rx_irq_en with rx_arm), as the
// paper asks; the enables are held per circuit and per receive buffer.
// Message memory: one 32-bit read port for the transmitter (one clock of
// latency) and one write port for the receiver, word addressed.
// Lint notes: the read-side r_tag/r_more outputs of the transmit buffers and
// of the clock-crossing buffer are left open because nothing there needs
// them; cmp_off from retx_timeout is unused because completions are decided
// by the control field alone; rst_n and rx_rst_n also reach assertion
// 'disable iff' clauses in submodules, which verilator reports as a reset
// used both synchronously and asynchronously.
module link_top
  import link_pkg::*;
#(
  parameter int AW      = 20,
  parameter int TIMEOUT = 20,
  parameter int DEPTH   = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         rx_clk,
  input  logic                         rx_rst_n,
  // serializer / deserializer
  output logic [9:0]                   tx_sym,
  input  logic [19:0]                  rx_word,
  // link initialisation register
  input  logic                         init_wr,
  input  logic [31:0]                  init_wdata,
  output logic [31:0]                  init_reg,
  input  logic                         far_init_go,
  input  logic [31:0]                  far_init_data,
  output logic                         far_init_busy,
  // transmit requests
  input  logic [15:0]                  timeout_cells,   // round-trip timeout, cells (1..TIMEOUT)
  input  logic [1:0]                   msg_go,
  input  logic [1:0][AW-1:0]           msg_base,
  input  logic [1:0][15:0]             msg_len,
  input  logic [1:0][3:0]              msg_buf,
  output logic [1:0]                   msg_busy,
  input  logic [1:0]                   msg_irq_en,
  output logic [1:0]                   msg_irq,
  input  logic                         trig_go,
  input  logic [TRIG_WORDS-1:0][31:0]  trig_data,
  output logic                         trig_busy,
  // receive side
  input  logic [1:0][NBUF-1:0]         rx_arm,
  input  logic [1:0][NBUF-1:0]         rx_irq_en,
  input  logic [1:0][NBUF-1:0][AW-1:0] rx_base,
  output logic [1:0][NBUF-1:0][15:0]   rx_len,
  output logic [1:0]                   rx_irq,
  output logic [3:0]                   rx_irq_buf,
  output logic                         trig_rx,
  output logic [TRIG_WORDS-1:0][31:0]  trig_rx_data,
  // message memory
  output logic                         mem_rd_en,
  output logic [AW-1:0]                mem_rd_addr,
  input  logic [31:0]                  mem_rd_data,
  output logic                         mem_wr_en,
  output logic [AW-1:0]                mem_wr_addr,
  output logic [31:0]                  mem_wr_data,
  // status
  output logic [15:0]                  tx_seq,
  output logic [15:0]                  rx_next,
  output logic [5:0][15:0]             err_cnt,
  output logic                         rx_locked,
  output logic                         rx_framed,
  output logic                         tx_sending,
  output logic                         tx_underflow,
  output logic                         rx_overrun
);
  // ---------------- link initialisation register ----------------
  logic        far_wr;
  logic [31:0] far_wdata;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         init_reg <= 32'h3;
    else if (init_wr)   init_reg <= init_wdata;
    else if (far_wr)    init_reg <= far_wdata;
  end
  logic tx_init, clear;
  assign tx_init = init_reg[0];
  assign clear   = init_reg[2];

  logic [1:0] align_sync;
  always_ff @(posedge rx_clk or negedge rx_rst_n) begin
    if (!rx_rst_n) align_sync <= 2'b11;
    else           align_sync <= {align_sync[0], init_reg[1]};
  end

  // ---------------- transmit ----------------
  logic        b1_w_ready, b1_w_en, b1_w_done, b1_r_avail, b1_r_done;
  logic [8:0]  b1_w_addr, b1_r_addr;
  logic [7:0]  b1_w_data, b1_r_data;
  logic        b2_w_ready, b2_w_done, b2_r_avail, b2_r_done;
  logic [1:0]  b2_w_en;
  logic [1:0][9:0] b2_w_addr;
  logic [1:0][7:0] b2_w_data;
  logic [9:0]  b2_r_addr;
  logic [7:0]  b2_r_data;

  logic        push, rt_valid, rt_pop, rt_busy, cmp_valid, timeout_evt;
  ctrl_t       push_ctrl, rt_ctrl, cmp_ctrl;
  logic [15:0] push_off, rt_off, cmp_off;
  logic        ack_valid;
  logic [15:0] ack_next;
  logic [1:0][NBUF-1:0] grant;
  logic [1:0][31:0] fc_word, far_fc;
  logic        fc_tx_done, fc_tx_circ, rx_last, rx_circ;
  logic [3:0]  fc_tx_buf, rx_buf;

  // Interrupt requests: a message interrupts the local processor on
  // completion only if msg_irq_en was set with its msg_go, and a received
  // message only if rx_irq_en was set for its buffer when it was armed.
  logic [1:0]           msg_done, rx_fin, msg_ie;
  logic [1:0][NBUF-1:0] rx_ie;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      msg_ie <= '0;
      rx_ie  <= '0;
    end else begin
      for (int c = 0; c < 2; c++) begin
        if (msg_go[c]) msg_ie[c] <= msg_irq_en[c];
        for (int b = 0; b < NBUF; b++)
          if (rx_arm[c][b]) rx_ie[c][b] <= rx_irq_en[c][b];
      end
    end
  end
  always_comb
    for (int c = 0; c < 2; c++) begin
      msg_irq[c] = msg_done[c] && msg_ie[c];
      rx_irq[c]  = rx_fin[c] && rx_ie[c][rx_irq_buf];
    end

  tx_cell_builder #(.AW(AW)) u_build (
    .clk, .rst_n, .enable(!tx_init && !clear),
    .msg_go, .msg_base, .msg_len, .msg_buf, .msg_busy, .msg_irq(msg_done),
    .trig_go, .trig_data, .trig_busy,
    .initw_go(far_init_go), .initw_data(far_init_data), .initw_busy(far_init_busy),
    .grant, .fc_tx_done, .fc_tx_circ, .fc_tx_buf, .fc_word,
    .rx_next, .err_cnt,
    .tx_seq, .push, .push_ctrl, .push_off, .rt_valid, .rt_ctrl, .rt_off, .rt_pop,
    .rt_busy, .cmp_valid, .cmp_ctrl,
    .mem_rd_en, .mem_rd_addr, .mem_rd_data,
    .w_ready(b1_w_ready), .w_en(b1_w_en), .w_addr(b1_w_addr), .w_data(b1_w_data),
    .w_done(b1_w_done)
  );

  pingpong_buf #(.DEPTH(DATA_BYTES)) u_txbuf1 (
    .wclk(clk), .wrst_n(rst_n), .w_en(b1_w_en), .w_addr(b1_w_addr), .w_data(b1_w_data),
    .w_done(b1_w_done), .w_tag(1'b0), .w_ready(b1_w_ready),
    .rclk(clk), .rrst_n(rst_n), .r_addr(b1_r_addr), .r_data(b1_r_data),
    .r_done(b1_r_done), .r_avail(b1_r_avail), .r_more(), .r_tag()
  );

  rs_encoder u_enc (
    .clk, .rst_n,
    .in_avail(b1_r_avail), .in_addr(b1_r_addr), .in_data(b1_r_data), .in_done(b1_r_done),
    .out_ready(b2_w_ready), .out_en(b2_w_en), .out_addr(b2_w_addr), .out_data(b2_w_data),
    .out_done(b2_w_done)
  );

  pingpong_buf #(.DEPTH(CELL_BYTES), .WLANES(2)) u_txbuf2 (
    .wclk(clk), .wrst_n(rst_n), .w_en(b2_w_en), .w_addr(b2_w_addr), .w_data(b2_w_data),
    .w_done(b2_w_done), .w_tag(1'b0), .w_ready(b2_w_ready),
    .rclk(clk), .rrst_n(rst_n), .r_addr(b2_r_addr), .r_data(b2_r_data),
    .r_done(b2_r_done), .r_avail(b2_r_avail), .r_more(), .r_tag()
  );

  tx_serial_stage u_ser (
    .clk, .rst_n, .init_mode(tx_init),
    .in_avail(b2_r_avail), .in_addr(b2_r_addr), .in_data(b2_r_data), .in_done(b2_r_done),
    .tx_sym, .sending_cells(tx_sending), .underflow(tx_underflow)
  );

  retx_timeout #(.TIMEOUT(TIMEOUT), .DEPTH(DEPTH)) u_retx (
    .clk, .rst_n, .clear, .timeout_set(timeout_cells), .tx_seq,
    .push, .push_ctrl, .push_off, .ack_valid, .ack_next,
    .cmp_valid, .cmp_ctrl, .cmp_off,
    .rt_valid, .rt_ctrl, .rt_off, .rt_pop, .busy(rt_busy), .timeout_evt
  );

  flow_ctrl u_fc (
    .clk, .rst_n, .clear, .arm(rx_arm),
    .rx_last, .rx_circ, .rx_buf,
    .tx_done(fc_tx_done), .tx_circ(fc_tx_circ), .tx_buf(fc_tx_buf),
    .far_valid(ack_valid), .far_word(far_fc), .hdr_word(fc_word), .grant
  );

  // ---------------- receive ----------------
  logic [1:0]      r1_w_en;
  logic [1:0][9:0] r1_w_addr, r1_r_addr;
  logic [1:0][7:0] r1_w_data, r1_r_data;
  logic            r1_w_done, r1_w_ready, r1_r_avail, r1_r_more, r1_r_done;
  rx_tag_t         r1_w_tag, r1_r_tag;
  logic [7:0]      r2_w_en;
  logic [7:0][8:0] r2_w_addr;
  logic [7:0][7:0] r2_w_data;
  logic            r2_w_done, r2_w_ready, r2_r_avail, r2_r_done;
  rx_tag_t         r2_w_tag, r2_r_tag;
  logic [8:0]      r2_r_addr;
  logic [7:0]      r2_r_data;
  logic            dec_overrun;

  rx_deser_stage u_deser (
    .rx_clk, .rst_n(rx_rst_n), .rx_word, .align_en(align_sync[1]),
    .w_en(r1_w_en), .w_addr(r1_w_addr), .w_data(r1_w_data), .w_done(r1_w_done),
    .w_tag(r1_w_tag), .locked(rx_locked), .framed(rx_framed)
  );

  pingpong_buf #(.DEPTH(CELL_BYTES), .WLANES(2), .RLANES(2), .TAGW($bits(rx_tag_t)), .PACED(1'b1)) u_rxbuf1 (
    .wclk(rx_clk), .wrst_n(rx_rst_n), .w_en(r1_w_en), .w_addr(r1_w_addr), .w_data(r1_w_data),
    .w_done(r1_w_done), .w_tag(r1_w_tag), .w_ready(r1_w_ready),
    .rclk(rx_clk), .rrst_n(rx_rst_n), .r_addr(r1_r_addr), .r_data(r1_r_data),
    .r_done(r1_r_done), .r_avail(r1_r_avail), .r_more(r1_r_more), .r_tag(r1_r_tag)
  );

  rx_rs_stage u_rsdec (
    .clk(rx_clk), .rst_n(rx_rst_n),
    .in_avail(r1_r_avail), .in_more(r1_r_more), .in_addr(r1_r_addr), .in_data(r1_r_data),
    .in_done(r1_r_done), .in_tag(r1_r_tag),
    .out_ready(r2_w_ready), .out_en(r2_w_en), .out_addr(r2_w_addr), .out_data(r2_w_data),
    .out_done(r2_w_done), .out_tag(r2_w_tag), .overrun(dec_overrun)
  );

  pingpong_buf #(.DEPTH(DATA_BYTES), .WLANES(8), .TAGW($bits(rx_tag_t))) u_rxbuf2 (
    .wclk(rx_clk), .wrst_n(rx_rst_n), .w_en(r2_w_en), .w_addr(r2_w_addr), .w_data(r2_w_data),
    .w_done(r2_w_done), .w_tag(r2_w_tag), .w_ready(r2_w_ready),
    .rclk(clk), .rrst_n(rst_n), .r_addr(r2_r_addr), .r_data(r2_r_data),
    .r_done(r2_r_done), .r_avail(r2_r_avail), .r_more(), .r_tag(r2_r_tag)
  );

  // stage 1 overrunning stage 2 is flagged together with decoder overruns
  logic r1_overrun;
  always_ff @(posedge rx_clk or negedge rx_rst_n) begin
    if (!rx_rst_n)                  r1_overrun <= 1'b0;
    else if (r1_w_done && !r1_w_ready) r1_overrun <= 1'b1;
  end
  assign rx_overrun = r1_overrun || dec_overrun;

  rx_cell_proc #(.AW(AW)) u_proc (
    .clk, .rst_n, .clear,
    .r_avail(r2_r_avail), .r_addr(r2_r_addr), .r_data(r2_r_data), .r_done(r2_r_done),
    .r_tag(r2_r_tag),
    .rx_next, .err_cnt, .timeout_evt,
    .ack_valid, .ack_next, .far_fc, .rx_last, .rx_circ, .rx_buf,
    .init_wr(far_wr), .init_wdata(far_wdata),
    .trig_rx, .trig_rx_data,
    .rx_base, .rx_len, .rx_irq(rx_fin), .rx_irq_buf,
    .mem_wr_en, .mem_wr_addr, .mem_wr_data
  );
endmodule
