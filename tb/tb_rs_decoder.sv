// tb_rs_decoder: self-checking test of the RS(19,11) decoder.
// Random code blocks from the reference encoder get 0..4 byte errors at random
// positions (must be corrected exactly, flagged corrected when errors > 0),
// or 6..8 errors (must not be reported as clean). Blocks are fed back to back
// at one byte per clock to exercise in_ready, and the output latency from the
// last input byte is checked against the documented 29 clocks.
module tb_rs_decoder;
  import rs_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid; logic [7:0] in_byte; logic in_ready;
  logic out_valid, out_done, out_corr, out_uncorr;
  logic [4:0] out_pos; logic [7:0] out_byte;
  int checks = 0, failures = 0;

  rs_decoder dut (.*);
  always #5 clk = ~clk;

  typedef struct { byte unsigned c [19]; int nerr; } blk_t;
  blk_t q [$];
  byte unsigned got [19];
  int last_in_cycle, cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  initial begin
    int nblk = 0;
    forever begin
      @(posedge clk);
      if (out_valid) got[out_pos] = out_byte;
      if (out_done) begin
        blk_t b;
        b = q.pop_front();
        if (b.nerr <= 4) begin
          checks++;
          if (got != b.c || out_uncorr || (out_corr != (b.nerr > 0))) begin
            failures++;
            $display("FAIL blk %0d nerr=%0d uncorr=%0d corr=%0d", nblk, b.nerr, out_uncorr, out_corr);
          end
        end else begin
          checks++;
          if (!out_uncorr && !out_corr) begin
            failures++;
            $display("FAIL blk %0d with %0d errors reported clean", nblk, b.nerr);
          end
        end
        nblk++;
      end
    end
  end

  // latency check
  initial begin
    @(posedge rst_n);
    wait (in_valid && in_ready && dut.in_cnt == 18);
    last_in_cycle = cyc;
    @(posedge clk iff out_done);
    checks++;
    if (cyc - last_in_cycle != 30) begin
      failures++;
      $display("FAIL latency %0d", cyc - last_in_cycle);
    end
  end

  initial begin
    byte unsigned d [11];
    byte unsigned c [19];
    byte unsigned r [19];
    in_valid = 0; in_byte = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      blk_t b;
      int nerr;
      for (int i = 0; i < 11; i++) d[i] = byte'($urandom);
      encode(d, c);
      nerr = (t % 10 < 9) ? (t % 5) : 6 + (t % 3);
      r = c;
      for (int e = 0; e < nerr; e++) begin
        int p;
        do p = $urandom_range(0, 18); while (r[p] != c[p]);
        r[p] = c[p] ^ byte'($urandom_range(1, 255));
      end
      b.c = c; b.nerr = nerr;
      q.push_back(b);
      for (int i = 0; i < 19; i++) begin
        @(negedge clk);
        in_valid = 1; in_byte = r[i];
        while (!in_ready) @(negedge clk);
      end
      @(negedge clk);
      in_valid = 0;
      if (t % 7 == 0) repeat (40) @(posedge clk);
    end
    repeat (100) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
