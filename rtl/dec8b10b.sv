// dec8b10b: combinational 8B/10B symbol decoder.
//
// Decodes one 10-bit symbol {a..j} (bit 9 received first) given the running
// disparity rd_in (1 = positive) in force before it, and returns the byte, a
// K-character flag (only K28.5 is recognised), an error flag and the running
// disparity after the symbol. The decode is a reverse search of the standard
// encoder tables from link_pkg. An error is flagged for a sub-block that is in
// no table, or for a 6-bit or 4-bit sub-block whose disparity does not fit
// the running disparity in force before it.
// For an unbalanced symbol the running disparity after it is taken from the
// symbol itself, so the decoder recovers from a wrong starting disparity after
// the first unbalanced symbol. Instances are chained for several symbols per
// clock.
module dec8b10b
  import link_pkg::*;
(
  input  logic [9:0] sym,
  input  logic       rd_in,
  output logic [7:0] data,
  output logic       k,
  output logic       err,
  output logic       rd_out
);
  logic [5:0] c6;
  logic [3:0] c4;
  logic       f6, f4;
  logic [4:0] x;
  logic [2:0] y;
  int         w6, w4;
  logic       rd_mid;

  always_comb begin
    c6 = sym[9:4];
    c4 = sym[3:0];
    f6 = 1'b0;
    f4 = 1'b0;
    x  = '0;
    y  = '0;
    k  = (c6 == 6'b001111) || (c6 == 6'b110000);
    if (k) begin
      f6 = 1'b1;
      x  = 5'd28;
    end
    for (int i = 0; i < 32; i++) begin
      if (!f6 && (enc6(5'(i), 1'b0, 1'b0) == c6 || enc6(5'(i), 1'b0, 1'b1) == c6)) begin
        f6 = 1'b1;
        x  = 5'(i);
      end
    end
    if (k && (c4 == 4'b1010 || c4 == 4'b0101)) begin
      f4 = 1'b1;
      y  = 3'd5;
    end
    for (int j = 0; j < 8; j++) begin
      for (int a = 0; a < 2; a++) begin
        if (!f4 && (enc4(3'(j), a[0], 1'b0) == c4 || enc4(3'(j), a[0], 1'b1) == c4)) begin
          f4 = 1'b1;
          y  = 3'(j);
        end
      end
    end
    w6     = ones6(c6);
    w4     = ones4(c4);
    rd_mid = (w6 == 3) ? rd_in : (w6 > 3);
    rd_out = (w4 == 2) ? rd_mid : (w4 > 2);
    err = !f6 || !f4 || (w6 == 4 && rd_in) || (w6 == 2 && !rd_in) ||
          (w4 == 3 && rd_mid) || (w4 == 1 && !rd_mid);
    if (k && y != 3'd5) begin                // only K28.5 is a valid K character
      err = 1'b1;
      k   = 1'b0;
    end
    data = {y, x};
  end
endmodule
