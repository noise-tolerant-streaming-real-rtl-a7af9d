// rx_deser_stage: first receive stage - alignment, 8B/10B decoding and cell
// framing, clocked by the 62.5 MHz clock recovered from the bit stream.
//
// The deserializer supplies 20 bits (two symbols) per clock. comma_aligner
// finds the symbol and pair boundaries from the K28.5/D21.4 ordered sets; two
// chained dec8b10b instances decode the pair. Framing: after at least
// OS_MIN aligned ordered sets the first pair that is not an ordered set is the
// first two bytes of a cell, and from then on every 304 pairs form one
// 608-byte cell, written in wire order into the first receive double buffer
// (two bytes per clock) and closed with a tag holding the cell's count of
// symbols with 8B/10B errors. Cells are counted, not marked, so noise cannot
// fake a cell start once framing is established. While align_en is high an
// ordered set seen where a cell would start returns the stage to the
// initialisation state (the far end is re-initialising); with align_en low
// that check is off, as the paper turns comma detection off once the link is
// up. The OS_MIN count and the re-initialisation rule are this design's.
// The tag's RS fields (rs_corr, rs_uncorr) are constant zero here: the
// decoder stage adds its counts to them.
module rx_deser_stage
  import link_pkg::*;
#(
  parameter int OS_MIN = 4
) (
  input  logic             rx_clk,
  input  logic             rst_n,
  input  logic [19:0]      rx_word,
  input  logic             align_en,
  // first receive double buffer, write side
  output logic [1:0]       w_en,
  output logic [1:0][9:0]  w_addr,
  output logic [1:0][7:0]  w_data,
  output logic             w_done,
  output rx_tag_t          w_tag,
  output logic             locked,
  output logic             framed
);
  logic [19:0] al;
  logic [7:0]  d0, d1;
  logic        k0, k1, e0, e1, rd, rd_mid, rd_next;

  comma_aligner u_align (
    .clk(rx_clk), .rst_n(rst_n), .din(rx_word), .align_en(align_en),
    .dout(al), .locked(locked)
  );
  dec8b10b u_dec0 (.sym(al[19:10]), .rd_in(rd),     .data(d0), .k(k0), .err(e0), .rd_out(rd_mid));
  dec8b10b u_dec1 (.sym(al[9:0]),   .rd_in(rd_mid), .data(d1), .k(k1), .err(e1), .rd_out(rd_next));

  logic is_os;
  assign is_os = k0 && !k1 && d1 == D21_4 && !e1;

  typedef enum logic [1:0] {F_HUNT, F_OS, F_CELL} fstate_e;
  fstate_e    fs;
  logic [3:0] os_cnt;
  logic [8:0] pidx;        // pair index in the cell, 0..303
  logic [7:0] errs;
  logic [1:0] nerr;
  assign nerr = 2'(e0) + 2'(e1);

  always_ff @(posedge rx_clk or negedge rst_n) begin
    if (!rst_n) begin
      fs     <= F_HUNT;
      os_cnt <= '0;
      pidx   <= '0;
      errs   <= '0;
      rd     <= 1'b0;
      w_en   <= '0;
      w_done <= 1'b0;
      w_addr <= '0;
      w_data <= '0;
      w_tag  <= '0;
    end else begin
      rd     <= rd_next;
      w_en   <= '0;
      w_done <= 1'b0;
      case (fs)
        F_HUNT: begin
          if (locked && is_os) begin
            if (32'(os_cnt) >= OS_MIN - 1) fs <= F_OS;
            else os_cnt <= os_cnt + 4'd1;
          end else begin
            os_cnt <= '0;
          end
        end
        F_OS: begin
          if (!locked) begin
            fs     <= F_HUNT;
            os_cnt <= '0;
          end else if (!is_os) begin
            fs     <= F_CELL;
            w_en   <= 2'b11;
            w_addr <= '{10'd1, 10'd0};
            w_data <= '{d1, d0};
            errs   <= 8'(nerr);
            pidx   <= 9'd1;
          end
        end
        default: begin   // F_CELL
          if (pidx == 9'd0 && align_en && is_os) begin
            fs     <= F_OS;
          end else if (align_en && !locked) begin
            fs     <= F_HUNT;
            os_cnt <= '0;
          end else begin
            w_en   <= 2'b11;
            w_addr <= '{10'({pidx, 1'b1}), 10'({pidx, 1'b0})};
            w_data <= '{d1, d0};
            if (pidx == 9'(CELL_BYTES / 2 - 1)) begin
              w_done    <= 1'b1;
              w_tag     <= '{err_8b10b: errs + 8'(nerr), rs_corr: '0, rs_uncorr: '0};
              pidx      <= '0;
              errs      <= '0;
            end else begin
              pidx <= pidx + 9'd1;
              errs <= errs + 8'(nerr);
            end
          end
        end
      endcase
    end
  end

  assign framed = fs == F_CELL;
endmodule
