// rx_cell_proc: third receive stage - header processing, sequence checking,
// error counting and delivery of cell contents, on the local 125 MHz clock.
//
// For each decoded cell in the clock-crossing double buffer the stage reads
// the 32 header bytes (symbol 0 of every block) and then:
//   - adds the cell's 8B/10B-error, corrected-block and uncorrectable-block
//     counts to their 16-bit counters; a cell with any uncorrectable block is
//     discarded, as its header cannot be trusted;
//   - passes the far end's next-expected sequence number to retx_timeout and
//     its flow-control longwords to flow_ctrl; counts a next-expected value
//     that did not advance by exactly one since the previous cell (harmless:
//     the two ends' clocks differ);
//   - if the cell's sequence number is the one expected, advances rx_next and
//     delivers the cell; otherwise counts a sequence error and drops it.
// Delivery: a message cell's payload (offset field minus the previous offset,
// in 64-byte chunks, at most five) is written as 32-bit words, most
// significant byte first, to message memory; the first cell of a message
// reloads the circuit's address register from the base address of the
// destination buffer; once the last one's data is written the stage loads
// the buffer's length register (in chunks) from the offset field, reports the
// buffer to flow control (rx_last) and raises rx_irq. A trigger cell loads the trigger-pattern
// registers (TRIG_WORDS longwords). An init_we bit writes header longword 1
// to the local link-initialisation register.
// The counters, in header order: 0 8B/10B errors, 1 corrected RS blocks,
// 2 uncorrectable RS blocks, 3 unexpected sequence numbers, 4 timeouts,
// 5 unexpected next-expected numbers. A cell takes at most about 370 clocks.
// Lint notes: header longwords 5-7 (the far end's error counters) are read
// but not kept, the top byte of the assembly word is shifted out, and the
// seven unused control bits are ignored.
module rx_cell_proc
  import link_pkg::*;
#(
  parameter int AW = 20
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           clear,
  // second receive double buffer, read side
  input  logic                           r_avail,
  output logic [8:0]                     r_addr,
  input  logic [7:0]                     r_data,
  output logic                           r_done,
  input  rx_tag_t                        r_tag,
  // status for the local transmitter's headers
  output logic [15:0]                    rx_next,
  output logic [5:0][15:0]               err_cnt,
  input  logic                           timeout_evt,
  // to retx_timeout and flow_ctrl
  output logic                           ack_valid,
  output logic [15:0]                    ack_next,
  output logic [1:0][31:0]               far_fc,
  output logic                           rx_last,
  output logic                           rx_circ,
  output logic [3:0]                     rx_buf,
  // link initialisation register write from the far end
  output logic                           init_wr,
  output logic [31:0]                    init_wdata,
  // trigger pattern receive registers
  output logic                           trig_rx,
  output logic [TRIG_WORDS-1:0][31:0]    trig_rx_data,
  // message buffers
  input  logic [1:0][NBUF-1:0][AW-1:0]   rx_base,
  output logic [1:0][NBUF-1:0][15:0]     rx_len,
  output logic [1:0]                     rx_irq,
  output logic [3:0]                     rx_irq_buf,
  output logic                           mem_wr_en,
  output logic [AW-1:0]                  mem_wr_addr,
  output logic [31:0]                    mem_wr_data
);
  typedef enum logic [2:0] {R_IDLE, R_HDR, R_EVAL, R_PAY, R_FIN} rstate_e;
  rstate_e st;

  logic [8:0]        j, jq;          // byte index issued / returned
  logic              vq;             // read data valid
  logic [7:0][31:0]  hdr;
  logic [15:0]       prev_ack;
  logic [1:0][AW-1:0] addr;
  logic [1:0][15:0]  prev_off;
  logic [8:0]        nbytes;
  logic [31:0]       word;
  logic              fin_last;       // cell being delivered ends a message

  ctrl_t       h_ctrl;
  logic [15:0] h_off, h_seq, h_ack;
  logic        h_c, h_msg;
  assign h_ctrl = ctrl_t'(hdr[0][31:16]);
  assign h_off  = hdr[0][15:0];
  assign h_seq  = hdr[4][31:16];
  assign h_ack  = hdr[4][15:0];
  assign h_c    = h_ctrl.circuit == CIRC_ASYNC;
  assign h_msg  = h_ctrl.circuit == CIRC_SYNC || h_ctrl.circuit == CIRC_ASYNC;

  logic [15:0] chunks;
  always_comb begin
    chunks = h_off - (h_ctrl.first ? 16'd0 : prev_off[h_c]);
    if (chunks > 16'(CELL_CHUNKS)) chunks = 16'(CELL_CHUNKS);
  end

  // read addresses: header byte b is symbol 0 of block b, payload byte j is
  // symbol 1 + j mod 10 of block j div 10
  always_comb begin
    if (st == R_HDR) r_addr = 9'(RS_K * int'(j));
    else             r_addr = 9'(RS_K * (int'(j) / 10) + 1 + int'(j) % 10);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= R_IDLE;
      j <= '0; jq <= '0; vq <= 1'b0;
      hdr <= '0; prev_ack <= '0; addr <= '0; prev_off <= '0; nbytes <= '0; word <= '0; fin_last <= 1'b0;
      rx_next <= '0; err_cnt <= '0;
      ack_valid <= 1'b0; ack_next <= '0; far_fc <= '0;
      rx_last <= 1'b0; rx_circ <= 1'b0; rx_buf <= '0;
      init_wr <= 1'b0; init_wdata <= '0;
      trig_rx <= 1'b0; trig_rx_data <= '0;
      rx_len <= '0; rx_irq <= '0; rx_irq_buf <= '0;
      mem_wr_en <= 1'b0; mem_wr_addr <= '0; mem_wr_data <= '0;
      r_done <= 1'b0;
    end else begin
      ack_valid <= 1'b0;
      rx_last   <= 1'b0;
      init_wr   <= 1'b0;
      trig_rx   <= 1'b0;
      rx_irq    <= '0;
      mem_wr_en <= 1'b0;
      r_done    <= 1'b0;
      if (timeout_evt) err_cnt[4] <= err_cnt[4] + 16'd1;
      vq <= 1'b0;
      jq <= j;
      case (st)
        R_IDLE: begin
          if (r_avail && !r_done) begin
            st <= R_HDR;
            j  <= '0;
          end
        end
        R_HDR: begin
          vq <= 1'b1;
          if (j != 9'(HDR_BYTES)) j <= j + 9'd1;
          if (vq) hdr[jq[4:2]][8*(3 - int'(jq[1:0])) +: 8] <= r_data;
          if (vq && jq == 9'(HDR_BYTES - 1)) st <= R_EVAL;
        end
        R_EVAL: begin
          err_cnt[0] <= err_cnt[0] + 16'(r_tag.err_8b10b);
          err_cnt[1] <= err_cnt[1] + 16'(r_tag.rs_corr);
          err_cnt[2] <= err_cnt[2] + 16'(r_tag.rs_uncorr);
          st <= R_FIN;
          if (r_tag.rs_uncorr == '0) begin
            ack_valid <= 1'b1;
            ack_next  <= h_ack;
            far_fc    <= {hdr[3], hdr[2]};
            prev_ack  <= h_ack;
            if (h_ack - prev_ack != 16'd1) err_cnt[5] <= err_cnt[5] + 16'd1;
            if (h_seq != rx_next) begin
              err_cnt[3] <= err_cnt[3] + 16'd1;
            end else begin
              rx_next <= rx_next + 16'd1;
              if (h_ctrl.init_we) begin
                init_wr    <= 1'b1;
                init_wdata <= hdr[1];
              end
              if (h_msg) begin
                nbytes <= 9'(chunks * 16'(CHUNK_BYTES));
                prev_off[h_c] <= h_off;
                if (h_ctrl.first) addr[h_c] <= rx_base[h_c][h_ctrl.buf_no];
                fin_last <= h_ctrl.last;
                j  <= '0;
                st <= R_PAY;
              end else if (h_ctrl.circuit == CIRC_TRIG) begin
                nbytes <= 9'(4 * TRIG_WORDS);
                j  <= '0;
                st <= R_PAY;
              end
            end
          end
        end
        R_PAY: begin
          if (j != nbytes) begin
            j  <= j + 9'd1;
            vq <= 1'b1;
          end
          if (vq) begin
            word <= {word[23:0], r_data};
            if (jq[1:0] == 2'd3) begin
              if (h_msg) begin
                mem_wr_en   <= 1'b1;
                mem_wr_addr <= addr[h_c];
                mem_wr_data <= {word[23:0], r_data};
                addr[h_c]   <= addr[h_c] + AW'(1);
              end else begin
                trig_rx_data[jq[4:2]] <= {word[23:0], r_data};
              end
            end
            if (jq == nbytes - 9'd1) begin
              st <= R_FIN;
              if (!h_msg) trig_rx <= 1'b1;
            end
          end
          if (nbytes == '0) st <= R_FIN;
        end
        R_FIN: begin
          r_done   <= 1'b1;
          st       <= R_IDLE;
          fin_last <= 1'b0;
          // the last cell of a message is reported once its data is written
          if (fin_last) begin
            rx_len[h_c][h_ctrl.buf_no] <= h_off;
            rx_last     <= 1'b1;
            rx_circ     <= h_c;
            rx_buf      <= h_ctrl.buf_no;
            rx_irq[h_c] <= 1'b1;
            rx_irq_buf  <= h_ctrl.buf_no;
          end
        end
        default: st <= R_IDLE;
      endcase
      if (clear) begin
        rx_next  <= '0;
        err_cnt  <= '0;
        prev_ack <= '0;
      end
    end
  end
endmodule
