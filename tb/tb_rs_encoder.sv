// tb_rs_encoder: three random cells are encoded back to back. The tb plays
// both double buffers. Every wire byte 32*p+b must equal symbol p of block b's
// code word from the reference encoder, and a cell must take at most 608
// clocks (the wbytes time of a cell) from start to out_done.
module tb_rs_encoder;
  import rs_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_avail, in_done, out_ready, out_done;
  logic [8:0] in_addr; logic [7:0] in_data;
  logic [1:0] out_en; logic [1:0][9:0] out_addr; logic [1:0][7:0] out_data;
  int checks = 0, failures = 0;

  rs_encoder dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte unsigned cells [3][352];
  byte unsigned wbytes [608];
  int rd_cell = 0, start_cyc, cyc = 0;
  always @(posedge clk) cyc++;

  // input buffer model: one-clock read latency
  always @(posedge clk) in_data <= cells[rd_cell < 3 ? rd_cell : 2][in_addr];
  always @(posedge clk) if (rst_n && in_done) rd_cell <= rd_cell + 1;
  assign in_avail = rd_cell < 3;
  assign out_ready = 1'b1;

  always @(posedge clk)
    for (int l = 0; l < 2; l++) if (out_en[l]) wbytes[out_addr[l]] = out_data[l];

  initial begin
    byte unsigned d [11];
    byte unsigned c [19];
    int cyc0;
    for (int n = 0; n < 3; n++) foreach (cells[n][i]) cells[n][i] = byte'($urandom);
    repeat (3) @(negedge clk);
    cyc0 = cyc;
    rst_n = 1;
    for (int n = 0; n < 3; n++) begin
      @(posedge clk iff out_done);
      #1;
      checks++;
      if (cyc - cyc0 > 608) begin
        failures++;
        $display("FAIL cell %0d took %0d clocks", n, cyc - cyc0);
      end
      cyc0 = cyc;
      for (int b = 0; b < 32; b++) begin
        for (int i = 0; i < 11; i++) d[i] = cells[n][11*b + i];
        encode(d, c);
        for (int p = 0; p < 19; p++) begin
          checks++;
          if (wbytes[32*p + b] != c[p]) begin
            failures++;
            if (failures < 10) $display("FAIL cell %0d blk %0d sym %0d got %h exp %h", n, b, p, wbytes[32*p+b], c[p]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
