// rs_decoder: Reed-Solomon (19,11) decoder, up to four byte errors per block.
//
// Bytes of one code block arrive in order (symbol 0 first, the coefficient of
// x^18). While they arrive the decoder stores them and accumulates the eight
// syndromes S_j = r(alpha^j). After the 19th byte the block is handed to a
// solver while the next block may already stream in (two block stores):
//   - Berlekamp-Massey, one iteration per clock (8 clocks), gives the error
//     locator Lambda(x) and its length L;
//   - one clock forms the evaluator Omega(x) = S(x)Lambda(x) mod x^8;
//   - a Chien search walks the 19 positions, one per clock, evaluating
//     Lambda, Omega and Lambda' at X^-1 and, at a root, applying the Forney
//     magnitude e = Omega(X^-1) / (X^-1 Lambda'(X^-1)) to the stored byte.
// Corrected bytes stream out (out_valid, out_pos, out_byte) during the Chien
// search; out_done then reports whether the block needed correction and
// whether it was uncorrectable (L > 4, or the number of roots found in the 19
// positions differs from L). An uncorrectable block's bytes must be ignored.
//
// Timing: the last output byte and out_done follow the last input byte by 29
// clocks, so a new block can be accepted every 30 clocks or slower; in_ready
// holds off the last byte of a block while the previous one is still being
// solved. The paper uses vendor-generated decoders and gives only their
// parameters; the algorithm here is this design's choice.
module rs_decoder
  import link_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [7:0] in_byte,
  output logic       in_ready,
  output logic       out_valid,
  output logic [4:0] out_pos,
  output logic [7:0] out_byte,
  output logic       out_done,
  output logic       out_corr,
  output logic       out_uncorr
);
  localparam logic [7:0] XINV0 = gf_alpha_pow(255 - (RS_N - 1));  // alpha^-18

  // ---------------- input: store and syndromes ----------------------------
  logic [7:0] store [2][RS_N];
  logic       wbank, sbank;
  logic [4:0] in_cnt;
  logic [7:0] syn [RS_NPAR];
  logic [7:0] S   [RS_NPAR];
  logic       busy;
  logic       accept, last_in;

  assign in_ready = !(busy && in_cnt == 5'(RS_N - 1));
  assign accept   = in_valid && in_ready;
  assign last_in  = accept && in_cnt == 5'(RS_N - 1);

  always_ff @(posedge clk) begin
    if (accept) begin
      store[wbank][in_cnt] <= in_byte;
      for (int j = 0; j < RS_NPAR; j++)
        syn[j] <= ((in_cnt == 0) ? 8'h00 : gf_mul(syn[j], gf_alpha_pow(j))) ^ in_byte;
    end
  end

  // ---------------- solver -------------------------------------------------
  typedef enum logic [2:0] {S_IDLE, S_BM, S_OMEGA, S_CHIEN, S_DONE} state_e;
  state_e     st;
  logic [3:0] n;               // BM iteration / Chien position counter
  logic [4:0] pos;
  logic [7:0] lam [RS_NPAR+1];
  logic [7:0] bb  [RS_NPAR+1];
  logic [7:0] om  [RS_NPAR];
  logic [3:0] L, mshift;
  logic [7:0] bdisc;
  logic [7:0] xinv;
  logic [3:0] roots;
  logic       bad;

  // BM step
  logic [7:0] disc, coef;
  logic [7:0] nlam [RS_NPAR+1];
  always_comb begin
    disc = S[n[2:0]];
    for (int i = 1; i <= RS_NPAR; i++)
      if (i <= int'(n)) disc ^= gf_mul(lam[i], S[int'(n) - i]);
    coef = gf_mul(disc, gf_inv(bdisc));
    for (int i = 0; i <= RS_NPAR; i++) begin
      nlam[i] = lam[i];
      if (i >= int'(mshift)) nlam[i] ^= gf_mul(coef, bb[i - int'(mshift)]);
    end
  end

  // Chien / Forney step
  logic [7:0] lamv, omv, dv, x2, ev;
  logic [7:0] fixed;
  logic       is_root;
  always_comb begin
    lamv = lam[RS_NPAR];
    for (int k = RS_NPAR - 1; k >= 0; k--) lamv = gf_mul(lamv, xinv) ^ lam[k];
    omv = om[RS_NPAR-1];
    for (int k = RS_NPAR - 2; k >= 0; k--) omv = gf_mul(omv, xinv) ^ om[k];
    x2 = gf_mul(xinv, xinv);
    dv = lam[7];
    for (int k = 5; k >= 1; k -= 2) dv = gf_mul(dv, x2) ^ lam[k];
    ev      = gf_mul(omv, gf_inv(gf_mul(xinv, dv)));
    is_root = (lamv == 8'h00) && (L <= 4'(RS_T));
    fixed   = store[sbank][pos] ^ (is_root ? ev : 8'h00);
  end

  logic [3:0] deg;
  always_comb begin
    deg = '0;
    for (int i = 1; i <= RS_NPAR; i++) if (lam[i] != 8'h00) deg = 4'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      busy       <= 1'b0;
      wbank      <= 1'b0;
      sbank      <= 1'b0;
      in_cnt     <= '0;
      n          <= '0;
      pos        <= '0;
      L          <= '0;
      mshift     <= '0;
      bdisc      <= 8'h01;
      xinv       <= XINV0;
      roots      <= '0;
      bad        <= 1'b0;
      out_valid  <= 1'b0;
      out_pos    <= '0;
      out_byte   <= '0;
      out_done   <= 1'b0;
      out_corr   <= 1'b0;
      out_uncorr <= 1'b0;
      for (int i = 0; i <= RS_NPAR; i++) begin
        lam[i] <= '0;
        bb[i]  <= '0;
      end
      for (int i = 0; i < RS_NPAR; i++) begin
        om[i] <= '0;
        S[i]  <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      out_done  <= 1'b0;
      if (accept) in_cnt <= last_in ? 5'd0 : in_cnt + 5'd1;
      if (last_in) begin
        for (int j = 0; j < RS_NPAR; j++)
          S[j] <= gf_mul(syn[j], gf_alpha_pow(j)) ^ in_byte;
        sbank <= wbank;
        wbank <= ~wbank;
        busy  <= 1'b1;
        st    <= S_BM;
        n     <= '0;
        L     <= '0;
        mshift <= 4'd1;
        bdisc <= 8'h01;
        for (int i = 0; i <= RS_NPAR; i++) begin
          lam[i] <= (i == 0) ? 8'h01 : 8'h00;
          bb[i]  <= (i == 0) ? 8'h01 : 8'h00;
        end
      end else begin
        case (st)
          S_BM: begin
            for (int i = 0; i <= RS_NPAR; i++) lam[i] <= nlam[i];
            if (disc == 8'h00) begin
              mshift <= mshift + 4'd1;
            end else if ({L, 1'b0} <= {1'b0, n}) begin
              for (int i = 0; i <= RS_NPAR; i++) bb[i] <= lam[i];
              L      <= n + 4'd1 - L;
              bdisc  <= disc;
              mshift <= 4'd1;
            end else begin
              mshift <= mshift + 4'd1;
            end
            n <= n + 4'd1;
            if (n == 4'(RS_NPAR - 1)) st <= S_OMEGA;
          end
          S_OMEGA: begin
            for (int k = 0; k < RS_NPAR; k++) begin
              logic [7:0] acc;
              acc = '0;
              for (int i = 0; i <= k; i++) acc ^= gf_mul(lam[i], S[k-i]);
              om[k] <= acc;
            end
            bad   <= (L > 4'(RS_T)) || (deg != L);
            xinv  <= XINV0;
            pos   <= '0;
            roots <= '0;
            st    <= S_CHIEN;
          end
          S_CHIEN: begin
            out_valid <= 1'b1;
            out_pos   <= pos;
            out_byte  <= fixed;
            if (is_root) roots <= roots + 4'd1;
            xinv <= gf_mul(xinv, 8'h02);
            pos  <= pos + 5'd1;
            if (pos == 5'(RS_N - 1)) st <= S_DONE;
          end
          S_DONE: begin
            out_done   <= 1'b1;
            out_uncorr <= bad || (roots != L);
            out_corr   <= !bad && (roots == L) && (L != 4'd0);
            busy       <= 1'b0;
            st         <= S_IDLE;
          end
          default: ;
        endcase
      end
    end
  end
endmodule
