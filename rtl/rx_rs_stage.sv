// rx_rs_stage: second receive stage - eight Reed-Solomon decoders sharing the
// 32 code blocks of a cell, clocked by the recovered 62.5 MHz clock.
//
// Decoder d handles blocks d, d+8, d+16 and d+24, one after the other, and
// takes one byte every four clocks, so the eight decoders together consume
// two bytes per clock - the wire rate - as in the paper. The stage starts as
// soon as the first receive double buffer holds a cell and reads it for
// exactly 304 clocks, moving to the next cell without a gap when it is
// already complete (in_more): in clock t it reads, through two read lanes, the next
// byte for decoders 2(t mod 4) and 2(t mod 4)+1 (byte k = t div 4 of that
// decoder's stream: block d+8(k div 19), symbol k mod 19, wire address
// 32*symbol+block). Corrected header and payload bytes (symbols 0..10) go
// through one write lane per decoder into the clock-crossing double buffer in
// block-major order (byte 11*block+symbol). When all 32 blocks of a cell are
// out, the bank is closed with a tag that adds the counts of corrected and
// uncorrectable blocks to the 8B/10B error count from stage 1. The last
// outputs of a cell follow its last input byte by about 30 clocks, while the
// next cell is already being read. `overrun` is a sticky flag for a write
// that found no free bank (stage 3 too slow), which the clock ratio rules out.
// Lint note: rst_n also feeds the assertion's 'disable iff', which verilator
// reports as a reset used both synchronously and asynchronously.
module rx_rs_stage
  import link_pkg::*;
#(
  parameter int NDEC = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // first receive double buffer, read side (two lanes)
  input  logic                  in_avail,
  input  logic                  in_more,
  output logic [1:0][9:0]       in_addr,
  input  logic [1:0][7:0]       in_data,
  output logic                  in_done,
  input  rx_tag_t               in_tag,
  // second receive double buffer, write side (one lane per decoder)
  input  logic                  out_ready,
  output logic [NDEC-1:0]       out_en,
  output logic [NDEC-1:0][8:0]  out_addr,
  output logic [NDEC-1:0][7:0]  out_data,
  output logic                  out_done,
  output rx_tag_t               out_tag,
  output logic                  overrun
);
  localparam int TICKS = CELL_BYTES / 2;       // 304

  logic        run, v_q;
  logic [8:0]  t;
  logic [1:0]  slot_q;
  logic [4:0]  k_sym;
  logic [1:0]  k_blk;
  logic [6:0]  k;
  logic        cell_q;          // which tag slot the input cell uses
  rx_tag_t     tag_hold [2];

  assign k     = 7'(t >> 2);
  assign k_blk = 2'(k / 7'(RS_N));
  assign k_sym = 5'(k % 7'(RS_N));
  always_comb
    for (int l = 0; l < 2; l++)
      in_addr[l] = 10'(32 * int'(k_sym) + 2 * int'(t[1:0]) + l + NDEC * int'(k_blk));
  assign in_done = run && t == 9'(TICKS - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run    <= 1'b0;
      t      <= '0;
      v_q    <= 1'b0;
      slot_q <= '0;
      cell_q <= 1'b0;
      tag_hold[0] <= '0;
      tag_hold[1] <= '0;
    end else begin
      v_q    <= run;
      slot_q <= t[1:0];
      if (run && t == '0) tag_hold[cell_q] <= in_tag;
      if (!run) begin
        if (in_avail) begin
          run <= 1'b1;
          t   <= '0;
        end
      end else if (in_done) begin
        // go straight on to the next cell if it is already complete: the
        // wire delivers a cell every 304 clocks, so an idle clock per cell
        // would let this stage fall further and further behind
        run    <= in_more;
        t      <= '0;
        cell_q <= ~cell_q;
      end else begin
        t <= t + 9'd1;
      end
    end
  end

  // decoders
  logic [NDEC-1:0]      d_in_valid, d_in_ready, d_out_valid, d_done, d_corr, d_uncorr;
  logic [NDEC-1:0][4:0] d_pos;
  logic [NDEC-1:0][7:0] d_byte, d_in_byte;
  logic [NDEC-1:0][1:0] d_blk;   // which of its four blocks a decoder outputs

  for (genvar d = 0; d < NDEC; d++) begin : g_dec
    assign d_in_valid[d] = v_q && (int'(slot_q) == d / 2);
    assign d_in_byte[d]  = in_data[d % 2];
    rs_decoder u_dec (
      .clk(clk), .rst_n(rst_n),
      .in_valid(d_in_valid[d]), .in_byte(d_in_byte[d]), .in_ready(d_in_ready[d]),
      .out_valid(d_out_valid[d]), .out_pos(d_pos[d]), .out_byte(d_byte[d]),
      .out_done(d_done[d]), .out_corr(d_corr[d]), .out_uncorr(d_uncorr[d])
    );
    assign out_en[d]   = d_out_valid[d] && d_pos[d] < 5'(RS_K);
    assign out_addr[d] = 9'(RS_K * (d + NDEC * int'(d_blk[d])) + int'(d_pos[d]));
    assign out_data[d] = d_byte[d];
  end

  // cell completion on the output side
  logic [5:0] ndone, ncorr, nunc;
  logic [5:0] sum_done, sum_corr, sum_unc;
  logic       ocell;
  always_comb begin
    sum_done = ndone;
    sum_corr = ncorr;
    sum_unc  = nunc;
    for (int d = 0; d < NDEC; d++) begin
      sum_done += 6'(d_done[d]);
      sum_corr += 6'(d_done[d] && d_corr[d]);
      sum_unc  += 6'(d_done[d] && d_uncorr[d]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ndone    <= '0;
      ncorr    <= '0;
      nunc     <= '0;
      ocell    <= 1'b0;
      d_blk    <= '0;
      out_done <= 1'b0;
      out_tag  <= '0;
      overrun  <= 1'b0;
    end else begin
      out_done <= 1'b0;
      for (int d = 0; d < NDEC; d++) if (d_done[d]) d_blk[d] <= d_blk[d] + 2'd1;
      if ((|out_en) && !out_ready) overrun <= 1'b1;
      if (sum_done == 6'(NBLK)) begin
        out_done <= 1'b1;
        out_tag  <= '{err_8b10b: tag_hold[ocell].err_8b10b, rs_corr: sum_corr, rs_uncorr: sum_unc};
        ocell    <= ~ocell;
        ndone    <= '0;
        ncorr    <= '0;
        nunc     <= '0;
      end else begin
        ndone <= sum_done;
        ncorr <= sum_corr;
        nunc  <= sum_unc;
      end
    end
  end

  // every decoder must be ready when its next byte arrives (rate by design)
  a_dec_rate: assert property (@(posedge clk) disable iff (!rst_n) (d_in_valid & ~d_in_ready) == '0);
endmodule
