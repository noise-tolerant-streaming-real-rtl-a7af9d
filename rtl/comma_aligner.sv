// comma_aligner: symbol and byte-pair alignment for the 20-bit receive path.
//
// The deserializer delivers 20 bits per recovered 62.5 MHz clock (bit 19
// first) at an unknown bit offset. While align_en is high the aligner searches
// the last 40 received bits for a K28.5 symbol (either disparity) and, when it
// finds one, moves its 20-bit window so the comma is the first of the two
// symbols. Because the link initialises with K28.5 + D21.4 ordered sets this
// fixes both the bit position in a byte and the byte position in a pair, as
// the paper describes. `locked` rises after LOCK_COUNT consecutive aligned
// commas. With align_en low the offset is frozen, so noise that mimics a comma
// cannot move the alignment (the paper disables comma re-sync once the link is
// initialised). Output is registered: one clock of latency.
module comma_aligner
  import link_pkg::*;
#(
  parameter int LOCK_COUNT = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [19:0] din,
  input  logic        align_en,
  output logic [19:0] dout,
  output logic        locked
);
  logic [19:0] prev;
  logic [39:0] win;
  logic [4:0]  off, hit_off;
  logic        hit;
  logic [3:0]  cnt;

  always_comb begin
    win     = {prev, din};
    hit     = 1'b0;
    hit_off = '0;
    for (int o = 0; o < 20; o++) begin
      if (!hit && (win[39-o -: 10] == K28_5_NEG || win[39-o -: 10] == K28_5_POS)) begin
        hit     = 1'b1;
        hit_off = 5'(o);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev   <= '0;
      off    <= '0;
      cnt    <= '0;
      locked <= 1'b0;
      dout   <= '0;
    end else begin
      prev <= din;
      dout <= win[39-off -: 20];
      if (align_en && hit) begin
        if (hit_off != off) begin
          off    <= hit_off;
          cnt    <= '0;
          locked <= 1'b0;
        end else if (32'(cnt) < LOCK_COUNT) begin
          cnt <= cnt + 1'b1;
        end else begin
          locked <= 1'b1;
        end
      end
    end
  end
endmodule
