// tb_enc8b10b: checks the 8B/10B encoder against published code words and
// against code properties on a long random stream: every symbol has 4, 5 or
// 6 ones, the running disparity of the bit stream stays within +-1 at symbol
// ends, no more than five equal bits in a row, and the comma sequences
// 0011111 / 1100000 never appear in data. It also checks the one-clock latency.
module tb_enc8b10b;
  logic clk = 0, rst_n = 0;
  logic valid, k, sym_valid;
  logic [7:0] data;
  logic [9:0] sym;
  int checks = 0, failures = 0;

  enc8b10b dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  task automatic send(input logic [7:0] d, input logic kk);
    @(negedge clk);
    valid = 1; data = d; k = kk;
    @(negedge clk);
    valid = 0;
  endtask

  initial begin
    int disp, run, runlen, ones;
    logic lastbit;
    logic [9:0] exp_seq [7] = '{10'b1001110100, 10'b1010101010, 10'b0101010101,
                                10'b0011111010, 10'b1100011011, 10'b1010110001, 10'b1000110111};
    logic [7:0] dat_seq [7] = '{8'h00, 8'hB5, 8'h4A, 8'hBC, 8'h03, 8'hFF, 8'hF1};
    logic       k_seq   [7] = '{0, 0, 0, 1, 0, 0, 0};
    valid = 0; data = 0; k = 0;
    repeat (2) @(negedge clk);
    // each vector from reset (running disparity negative)
    for (int i = 0; i < 7; i++) begin
      rst_n = 0;
      @(negedge clk);
      rst_n = 1;
      @(negedge clk);
      valid = 1; data = dat_seq[i]; k = k_seq[i];
      @(posedge clk); #1;
      chk(sym_valid && sym == exp_seq[i], $sformatf("vector %0d got %b exp %b", i, sym, exp_seq[i]));
      @(negedge clk);
      valid = 0;
    end
    // random stream properties
    disp = 0; runlen = 0; lastbit = 0;
    @(negedge clk);
    for (int n = 0; n < 3000; n++) begin
      logic [19:0] win;
      valid = 1; data = 8'($urandom); k = (n % 50 == 0);
      @(posedge clk); #1;
      ones = $countones(sym);
      chk(ones >= 4 && ones <= 6, "symbol weight");
      disp += 2 * ones - 10;
      chk(disp >= -2 && disp <= 2, "running disparity bound");
      for (int b = 9; b >= 0; b--) begin
        if (sym[b] == lastbit) runlen++; else runlen = 1;
        lastbit = sym[b];
        if (runlen > 5) begin
          chk(0, "run length");
          runlen = 0;
        end
      end
      @(negedge clk);
    end
    valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
