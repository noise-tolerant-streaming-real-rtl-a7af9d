// enc8b10b: one-symbol-per-clock 8B/10B encoder with running disparity.
//
// Each clock with valid=1 encodes one byte (k=1 sends the K28.5 comma, the only
// control character the link uses) into a 10-bit symbol {a..j}, bit 9 sent
// first, and updates the running disparity. Output is registered: the symbol
// appears one clock after the byte. Running disparity resets to negative. The
// code tables are the standard 8B/10B ones; the paper only names the code.
module enc8b10b
  import link_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       valid,
  input  logic [7:0] data,
  input  logic       k,
  output logic [9:0] sym,
  output logic       sym_valid
);
  logic        rd;
  logic [10:0] enc;

  always_comb enc = enc8b10b_f(data, k, rd);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd        <= 1'b0;
      sym       <= '0;
      sym_valid <= 1'b0;
    end else begin
      sym_valid <= valid;
      if (valid) begin
        sym <= enc[9:0];
        rd  <= enc[10];
      end
    end
  end
endmodule
