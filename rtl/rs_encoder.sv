// rs_encoder: second transmit stage, one Reed-Solomon (19,11) encoder for all
// 32 interleaved code blocks of a cell.
//
// The stage reads the 352 header+payload bytes of a cell from the first
// transmit double buffer (block-major order, byte 11*b+p) and writes the 608
// encoded bytes into the second double buffer in wire order (byte 32*p+b), so
// the serial stage only has to read it linearly. It walks the cell in wire
// order: for symbols 0..10 it reads data byte (b,p), one per clock, passes it
// through and advances block b's division remainder; for symbols 11..18 it
// writes the remainder bytes, two blocks per clock. The 32 eight-byte
// remainders are held in a register file, so a single 125 MHz encoder covers
// all blocks, as in the paper. The code is systematic,
// g(x) = prod_{i=0..7}(x + alpha^i) over GF(2^8) with polynomial 0x11D (field
// and roots are this design's choice); symbol 0 is the highest-degree
// coefficient.
//
// Timing: a cell takes 352 + 128 clocks plus two of start-up, well inside the
// 608-clock cell time of the serial stage. Writing two ECC bytes per clock is
// this design's choice; it gives the slack the double-buffer hand-over needs.
module rs_encoder
  import link_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // first double buffer, read side
  input  logic            in_avail,
  output logic [8:0]      in_addr,
  input  logic [7:0]      in_data,
  output logic            in_done,
  // second double buffer, write side (two lanes)
  input  logic            out_ready,
  output logic [1:0]      out_en,
  output logic [1:0][9:0] out_addr,
  output logic [1:0][7:0] out_data,
  output logic            out_done
);
  localparam logic [8*RS_NPAR-1:0] GEN = rs_gen_poly();
  localparam int DATA_END = NBLK * RS_K;   // first ECC wire byte (352)

  logic [7:0] rem [NBLK][RS_NPAR];   // rem[b][i] = coefficient of x^i
  logic       a_run, b_val;
  logic [9:0] a_cnt, b_cnt;          // wire byte index
  logic [4:0] a_blk, a_sym, b_blk, b_sym;

  assign a_blk = a_cnt[4:0];
  assign a_sym = 5'(a_cnt >> 5);
  assign b_blk = b_cnt[4:0];
  assign b_sym = 5'(b_cnt >> 5);

  assign in_addr = 9'(11 * int'(a_blk) + int'(a_sym));
  assign in_done = a_run && a_cnt == 10'(DATA_END - 1);

  // remainder update for the data byte in stage B
  logic [7:0] fb;
  logic [7:0] nrem [RS_NPAR];
  always_comb begin
    fb = in_data ^ ((b_sym == 0) ? 8'h00 : rem[b_blk][RS_NPAR-1]);
    for (int i = RS_NPAR - 1; i > 0; i--)
      nrem[i] = ((b_sym == 0) ? 8'h00 : rem[b_blk][i-1]) ^ gf_mul(GEN[8*i +: 8], fb);
    nrem[0] = gf_mul(GEN[7:0], fb);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_run <= 1'b0;
      a_cnt <= '0;
      b_val <= 1'b0;
      b_cnt <= '0;
    end else begin
      b_val <= a_run;
      b_cnt <= a_cnt;
      if (!a_run && !b_val) begin
        if (in_avail && out_ready) begin
          a_run <= 1'b1;
          a_cnt <= '0;
        end
      end else if (a_run) begin
        if (a_cnt >= 10'(CELL_BYTES - 2)) a_run <= 1'b0;
        a_cnt <= a_cnt + ((a_cnt < 10'(DATA_END)) ? 10'd1 : 10'd2);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (b_val && b_cnt < 10'(DATA_END))
      for (int i = 0; i < RS_NPAR; i++) rem[b_blk][i] <= nrem[i];
  end

  logic [2:0] eidx;
  assign eidx = 3'(RS_NPAR - 1 - (int'(b_sym) - RS_K));
  always_comb begin
    out_addr[0] = b_cnt;
    out_addr[1] = b_cnt + 10'd1;
    if (b_cnt < 10'(DATA_END)) begin
      out_en      = {1'b0, b_val};
      out_data[0] = in_data;
      out_data[1] = '0;
    end else begin
      out_en      = {b_val, b_val};
      out_data[0] = rem[b_blk][eidx];
      out_data[1] = rem[b_blk + 5'd1][eidx];
    end
    out_done = b_val && b_cnt == 10'(CELL_BYTES - 2);
  end
endmodule
