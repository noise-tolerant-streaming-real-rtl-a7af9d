// link_pkg: constants, types and functions shared by the noise-tolerant link.
//
// A cell is 608 bytes on the wire: 32 interleaved Reed-Solomon (19,11) code
// blocks, each holding one header byte, ten payload bytes and eight ECC bytes.
// Wire byte w belongs to code block (w mod 32) and is symbol (w div 32) of that
// block, so a burst of up to 127 consecutive bytes touches at most four symbols
// of any block. Before encoding (and after decoding) a cell is kept in
// "block-major" order: byte 11*b+p is symbol p (0..10) of block b.
//
// The header is eight 32-bit longwords built from the 32 header bytes (header
// byte b is symbol 0 of block b; longword L is bytes 4L..4L+3, most significant
// first). The cell geometry, header layout and control-field bit positions
// follow the paper; the byte order inside a longword, the Galois field
// polynomial (0x11D) and the generator roots alpha^0..alpha^7 are this design's
// own choices. The 8B/10B tables are the standard ones.
package link_pkg;

  localparam int NBLK       = 32;   // interleaved code blocks per cell
  localparam int RS_N       = 19;   // code block length
  localparam int RS_K       = 11;   // header byte + 10 payload bytes
  localparam int RS_NPAR    = 8;    // ECC bytes per block
  localparam int RS_T       = 4;    // correctable bytes per block
  localparam int CELL_BYTES = NBLK * RS_N;   // 608 bytes on the wire
  localparam int DATA_BYTES = NBLK * RS_K;   // 352 header+payload bytes
  localparam int HDR_BYTES  = NBLK;          // 32 header bytes = 8 longwords
  localparam int PAY_BYTES  = NBLK * 10;     // 320 payload bytes
  localparam int CHUNK_BYTES = 64;           // offset field unit
  localparam int CELL_CHUNKS = PAY_BYTES / CHUNK_BYTES;  // 5
  localparam int NBUF       = 16;            // receive buffers per message circuit
  localparam int TRIG_WORDS = 8;             // trigger pattern length (longwords)

  // circuit field of the control word
  typedef enum logic [1:0] {
    CIRC_NOOP  = 2'd0,
    CIRC_TRIG  = 2'd1,
    CIRC_SYNC  = 2'd2,   // beam-synchronous message circuit
    CIRC_ASYNC = 2'd3    // beam-asynchronous message circuit
  } circuit_e;

  // 16-bit control field of header longword 0 (bits 15:9 unused)
  typedef struct packed {
    logic [6:0] unused;
    logic       init_we;   // write far-end link initialisation register
    logic       last;      // last cell of a message buffer
    logic       first;     // first cell of a message buffer
    circuit_e   circuit;
    logic [3:0] buf_no;    // destination receive buffer
  } ctrl_t;

  // description of a transmitted cell kept for acknowledgement/retransmission
  typedef struct packed {
    logic [15:0] seq;
    ctrl_t       ctrl;
    logic [15:0] off_excl;   // data offset (64-byte chunks) before this cell
  } cell_desc_t;

  // status carried with a received cell from stage 1/2 to stage 3
  typedef struct packed {
    logic [7:0] err_8b10b;   // symbols with 8B/10B errors
    logic [5:0] rs_corr;     // code blocks with corrected errors
    logic [5:0] rs_uncorr;   // code blocks that could not be corrected
  } rx_tag_t;

  // byte positions
  function automatic int wire_addr(int blk, int sym);
    return 32 * sym + blk;
  endfunction
  function automatic int data_addr(int blk, int sym);
    return 11 * blk + sym;
  endfunction

  // ---------------- GF(2^8), field polynomial x^8+x^4+x^3+x^2+1 -------------
  function automatic logic [7:0] gf_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, aa;
    p  = '0;
    aa = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= aa;
      aa = {aa[6:0], 1'b0} ^ (aa[7] ? 8'h1D : 8'h00);
    end
    return p;
  endfunction

  function automatic logic [7:0] gf_alpha_pow(input int n);
    logic [7:0] r;
    r = 8'h01;
    for (int i = 0; i < (n % 255); i++) r = gf_mul(r, 8'h02);
    return r;
  endfunction

  // a^254 = a^-1 (0 maps to 0)
  function automatic logic [7:0] gf_inv(input logic [7:0] a);
    logic [7:0] r, sq;
    r  = 8'h01;
    sq = a;
    for (int i = 0; i < 8; i++) begin
      if (i != 0) r = gf_mul(r, sq);
      sq = gf_mul(sq, sq);
    end
    return r;
  endfunction

  // generator polynomial g(x) = prod_{i=0..7} (x + alpha^i); returns g0..g7
  // (the x^8 coefficient is 1)
  function automatic logic [8*RS_NPAR-1:0] rs_gen_poly();
    logic [7:0] g [RS_NPAR+1];
    logic [8*RS_NPAR-1:0] flat;
    for (int i = 0; i <= RS_NPAR; i++) g[i] = 8'h00;
    g[0] = 8'h01;
    for (int r = 0; r < RS_NPAR; r++) begin
      for (int i = RS_NPAR; i > 0; i--)
        g[i] = g[i-1] ^ gf_mul(g[i], gf_alpha_pow(r));
      g[0] = gf_mul(g[0], gf_alpha_pow(r));
    end
    for (int i = 0; i < RS_NPAR; i++) flat[8*i +: 8] = g[i];
    return flat;
  endfunction

  // ---------------- 8B/10B ------------------------------------------------
  // Symbols are 10 bits {a,b,c,d,e,i,f,g,h,j}; bit 9 ("a") is sent first.
  localparam logic [9:0] K28_5_NEG = 10'b0011111010;  // running disparity -
  localparam logic [9:0] K28_5_POS = 10'b1100000101;  // running disparity +
  localparam logic [7:0] D21_4     = 8'hB5;
  localparam logic [7:0] K28_5     = 8'hBC;

  // 5b/6b code for running disparity -
  function automatic logic [5:0] code6_neg(input logic [4:0] x);
    case (x)
      5'd0:  return 6'b100111;  5'd1:  return 6'b011101;
      5'd2:  return 6'b101101;  5'd3:  return 6'b110001;
      5'd4:  return 6'b110101;  5'd5:  return 6'b101001;
      5'd6:  return 6'b011001;  5'd7:  return 6'b111000;
      5'd8:  return 6'b111001;  5'd9:  return 6'b100101;
      5'd10: return 6'b010101;  5'd11: return 6'b110100;
      5'd12: return 6'b001101;  5'd13: return 6'b101100;
      5'd14: return 6'b011100;  5'd15: return 6'b010111;
      5'd16: return 6'b011011;  5'd17: return 6'b100011;
      5'd18: return 6'b010011;  5'd19: return 6'b110010;
      5'd20: return 6'b001011;  5'd21: return 6'b101010;
      5'd22: return 6'b011010;  5'd23: return 6'b111010;
      5'd24: return 6'b110011;  5'd25: return 6'b100110;
      5'd26: return 6'b010110;  5'd27: return 6'b110110;
      5'd28: return 6'b001110;  5'd29: return 6'b101110;
      5'd30: return 6'b011110;  default: return 6'b101011;
    endcase
  endfunction

  function automatic int ones6(input logic [5:0] c);
    return int'(c[0]) + int'(c[1]) + int'(c[2]) + int'(c[3]) + int'(c[4]) + int'(c[5]);
  endfunction
  function automatic int ones4(input logic [3:0] c);
    return int'(c[0]) + int'(c[1]) + int'(c[2]) + int'(c[3]);
  endfunction

  // 6-bit sub-block for data (k=0) or K.28 (k=1) at running disparity rd (1 = +)
  function automatic logic [5:0] enc6(input logic [4:0] x, input logic k, input logic rd);
    logic [5:0] c;
    c = k ? 6'b001111 : code6_neg(x);
    if (rd && (ones6(c) != 3 || (!k && x == 5'd7))) c = ~c;
    return c;
  endfunction

  // 4-bit sub-block; a7 selects the alternate D.x.A7 code
  function automatic logic [3:0] enc4(input logic [2:0] y, input logic a7, input logic rd);
    logic [3:0] c;
    case (y)
      3'd0: c = 4'b1011;  3'd1: c = 4'b1001;
      3'd2: c = 4'b0101;  3'd3: c = 4'b1100;
      3'd4: c = 4'b1101;  3'd5: c = 4'b1010;
      3'd6: c = 4'b0110;  default: c = a7 ? 4'b0111 : 4'b1110;
    endcase
    if (rd && (ones4(c) != 2 || y == 3'd3)) c = ~c;
    return c;
  endfunction

  // full 8B/10B encode: returns {rd_out, symbol}; k=1 encodes K28.5 only
  function automatic logic [10:0] enc8b10b_f(input logic [7:0] d, input logic k, input logic rd);
    logic [5:0] c6;
    logic [3:0] c4;
    logic       rd1, rd2, a7;
    c6  = enc6(d[4:0], k, rd);
    rd1 = (ones6(c6) == 3) ? rd : ~rd;
    a7  = (!rd1 && (d[4:0] == 5'd17 || d[4:0] == 5'd18 || d[4:0] == 5'd20)) ||
          ( rd1 && (d[4:0] == 5'd11 || d[4:0] == 5'd13 || d[4:0] == 5'd14));
    // K28.5 keeps the sub-block polarity of the 6-bit part: 001111 1010 or 110000 0101
    c4  = k ? (rd ? 4'b0101 : 4'b1010) : enc4(d[7:5], a7, rd1);
    rd2 = (ones4(c4) == 2) ? rd1 : ~rd1;
    return {rd2, c6, c4};
  endfunction

endpackage
