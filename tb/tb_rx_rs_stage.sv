// tb_rx_rs_stage: four encoded cells pass through the eight-decoder stage
// back to back, as the receive buffer would supply them:
//   cell 0 clean, cell 1 with a 127-byte noise burst (the paper's worst case:
//   at most four bad bytes per block), cell 2 with random errors of up to
//   four bytes per block, cell 3 with six bad bytes in block 5.
// The decoded header+payload bytes must equal the originals (not checked for
// cell 3), the tags must count the corrected and uncorrectable blocks, the
// stage must read each cell in exactly 304 clocks with no gap between
// cells, and the cell must be complete within 340 clocks of its start.
module tb_rx_rs_stage;
  import rs_ref_pkg::*;
  import link_pkg::rx_tag_t;
  logic clk = 0, rst_n = 0;
  logic in_avail, in_more, in_done, out_ready, out_done, overrun;
  logic [1:0][9:0] in_addr; logic [1:0][7:0] in_data;
  rx_tag_t in_tag, out_tag;
  logic [7:0] out_en; logic [7:0][8:0] out_addr; logic [7:0][7:0] out_data;
  int checks = 0, failures = 0;

  rx_rs_stage dut (.*);
  always #8 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NC = 4;
  byte unsigned data [NC][352];
  byte unsigned wbuf [NC][608];
  byte unsigned got [352];
  int exp_corr [NC], exp_unc [NC];
  int rc = 0, cyc = 0, t_start [NC], t_done [NC];
  always @(posedge clk) cyc++;

  always @(posedge clk) for (int l = 0; l < 2; l++) in_data[l] <= wbuf[rc < NC ? rc : NC-1][in_addr[l]];
  always @(posedge clk) if (rst_n && in_done) begin t_done[rc] = cyc; rc <= rc + 1; end
  assign in_avail = rc < NC;
  assign in_more  = rc + 1 < NC;
  assign in_tag = '{err_8b10b: 8'(rc + 3), rs_corr: '0, rs_uncorr: '0};
  assign out_ready = 1'b1;
  always @(posedge clk)
    if (dut.run == 0 && in_avail) t_start[rc] = cyc;
    else if (in_done && rc + 1 < NC) t_start[rc + 1] = cyc;   // next cell follows with no gap
  always @(posedge clk) for (int d = 0; d < 8; d++) if (out_en[d]) got[out_addr[d]] = out_data[d];

  initial begin
    byte unsigned d [11];
    byte unsigned c [19];
    int bad [32];
    for (int n = 0; n < NC; n++) begin
      for (int i = 0; i < 352; i++) data[n][i] = byte'($urandom);
      for (int b = 0; b < 32; b++) begin
        for (int i = 0; i < 11; i++) d[i] = data[n][11*b + i];
        encode(d, c);
        for (int p = 0; p < 19; p++) wbuf[n][32*p + b] = c[p];
      end
      exp_corr[n] = 0; exp_unc[n] = 0;
      bad = '{default: 0};
      if (n == 1) begin
        int s = 200;
        for (int w = s; w < s + 127; w++) begin
          wbuf[n][w] ^= byte'($urandom_range(1, 255));
          bad[w % 32] = 1;
        end
      end else if (n == 2) begin
        for (int b = 0; b < 32; b++) begin
          int ne;
          int ps [$];
          ne = $urandom_range(0, 4);
          ps.delete();
          for (int e = 0; e < ne; e++) begin
            int p;
            do p = $urandom_range(0, 18); while (p inside {ps});
            ps.push_back(p);
            wbuf[n][32*p + b] ^= byte'($urandom_range(1, 255));
            bad[b] = 1;
          end
        end
      end else if (n == 3) begin
        for (int p = 0; p < 6; p++) wbuf[n][32*p + 5] ^= 8'h5A;
        exp_unc[n] = 1;
      end
      for (int b = 0; b < 32; b++) exp_corr[n] += bad[b];
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NC; n++) begin
      @(posedge clk iff out_done);
      #1;
      checks++;
      if (out_tag.rs_corr != 6'(exp_corr[n]) || out_tag.rs_uncorr != 6'(exp_unc[n]) ||
          out_tag.err_8b10b != 8'(n + 3)) begin
        failures++;
        $display("FAIL cell %0d tag corr %0d/%0d unc %0d/%0d e8 %0d", n, out_tag.rs_corr, exp_corr[n],
                 out_tag.rs_uncorr, exp_unc[n], out_tag.err_8b10b);
      end
      checks++;
      if (t_done[n] - t_start[n] != 304 || cyc - t_start[n] > 340) begin
        failures++;
        $display("FAIL cell %0d timing read %0d done %0d", n, t_done[n] - t_start[n], cyc - t_start[n]);
      end
      if (n > 0) begin
        // cells that are already waiting are read back to back, one every
        // 304 clocks: the wire rate
        checks++;
        if (t_done[n] - t_done[n-1] != 304) begin
          failures++;
          $display("FAIL cell %0d read %0d clocks after the previous one", n, t_done[n] - t_done[n-1]);
        end
      end
      if (n != 3) begin
        checks++;
        if (got != data[n]) begin
          failures++;
          $display("FAIL cell %0d data mismatch", n);
        end
      end
    end
    checks++;
    if (overrun) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
