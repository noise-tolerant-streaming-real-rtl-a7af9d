// tb_rx_deser_stage: a bit stream of 40 ordered sets followed by three cells
// (8B/10B encoded by the reference function, shifted by 13 bits) is fed 20
// bits per clock. The stage must lock, frame the first cell on the first byte
// after the ordered sets, write every byte of every cell to its wire address,
// close each cell after exactly 304 clocks, and count the one symbol that is
// corrupted in cell 1 in that cell's tag. A comma mimicked by noise in cell 2
// must not disturb framing once align_en is low.
module tb_rx_deser_stage;
  import link_pkg::*;
  logic rx_clk = 0, rst_n = 0;
  logic [19:0] rx_word;
  logic align_en, w_done, locked, framed;
  logic [1:0] w_en; logic [1:0][9:0] w_addr; logic [1:0][7:0] w_data;
  rx_tag_t w_tag;
  int checks = 0, failures = 0;

  rx_deser_stage dut (.*);
  always #8 rx_clk = ~rx_clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit q [$];
  logic rd = 0;
  task automatic put(input logic [7:0] d, input logic k, input logic corrupt = 0);
    logic [10:0] e;
    e = enc8b10b_f(d, k, rd);
    rd = e[10];
    if (corrupt) e[9:0] = ~e[9:0] ^ 10'b1;
    for (int b = 9; b >= 0; b--) q.push_back(e[b]);
  endtask

  byte unsigned cells [3][608];
  byte unsigned got [608];
  always @(posedge rx_clk) for (int l = 0; l < 2; l++) if (w_en[l]) got[w_addr[l]] = w_data[l];

  initial begin
    foreach (cells[i, j]) cells[i][j] = byte'($urandom);
    for (int b = 0; b < 13; b++) q.push_back(1'b0);
    for (int i = 0; i < 40; i++) begin put(K28_5, 1); put(D21_4, 0); end
    for (int c = 0; c < 3; c++)
      for (int j = 0; j < 608; j++)
        if (c == 2 && j == 200) put(K28_5, 1);     // noise mimicking a comma
        else put(cells[c][j], 0, c == 1 && j == 100);
    cells[2][200] = K28_5;
    repeat (200) q.push_back(1'b0);
    rx_word = 0; align_en = 1;
    repeat (2) @(negedge rx_clk);
    rst_n = 1;
    fork
      forever begin
        @(negedge rx_clk);
        for (int b = 19; b >= 0; b--) rx_word[b] = (q.size() > 0) ? q.pop_front() : 1'b0;
      end
    join_none
    wait (framed);
    align_en = 0;
    for (int c = 0; c < 3; c++) begin
      int t0;
      t0 = $time;
      @(posedge rx_clk iff w_done);
      #1;
      checks++;
      if (c == 1) got[100] = cells[1][100];   // the corrupted symbol
      if (got != cells[c]) begin
        failures++;
        for (int j = 0; j < 608; j++) if (got[j] != cells[c][j] && failures < 8) $display("FAIL cell %0d byte %0d", c, j);
      end
      checks++;
      if (w_tag.err_8b10b != 8'(c == 1)) begin failures++; $display("FAIL cell %0d err count %0d", c, w_tag.err_8b10b); end
      if (c > 0) begin
        checks++;
        if (($time - t0) != 304 * 16) begin failures++; $display("FAIL cell period %0t", $time - t0); end
      end
    end
    checks++;
    if (!locked) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
