// tb_pingpong_buf: writer and reader on unrelated clocks pass 20 cells
// through the double buffer (two write lanes, two read lanes). Each cell's
// bytes and tag must arrive intact and in order; the writer must see w_ready
// low while both banks are full (the reader is made slow on purpose).
module tb_pingpong_buf;
  localparam int DEPTH = 16;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic [1:0] w_en; logic [1:0][3:0] w_addr; logic [1:0][7:0] w_data;
  logic w_done, w_ready, r_done, r_avail, r_more;
  int more_seen = 0;
  logic [7:0] w_tag, r_tag;
  logic [1:0][3:0] r_addr; logic [1:0][7:0] r_data;
  int checks = 0, failures = 0, full_seen = 0;

  pingpong_buf #(.DEPTH(DEPTH), .WLANES(2), .RLANES(2), .TAGW(8)) dut (.*);
  always #4 wclk = ~wclk;
  always #7 rclk = ~rclk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] pat(int cn, int a);
    return 8'(cn * 37 + a * 5 + 1);
  endfunction

  initial begin   // writer
    w_en = 0; w_done = 0; w_addr = 0; w_data = 0; w_tag = 0;
    repeat (3) @(negedge wclk);
    wrst_n = 1;
    for (int c = 0; c < 20; c++) begin
      @(negedge wclk);
      while (!w_ready) begin
        full_seen++;
        @(negedge wclk);
      end
      for (int a = 0; a < DEPTH; a += 2) begin
        w_en = 2'b11;
        w_addr[0] = 4'(a); w_addr[1] = 4'(a + 1);
        w_data[0] = pat(c, a); w_data[1] = pat(c, a + 1);
        @(negedge wclk);
      end
      w_en = 0; w_done = 1; w_tag = 8'(c);
      @(negedge wclk);
      w_done = 0;
    end
  end

  initial begin   // reader
    r_done = 0; r_addr = 0;
    repeat (3) @(negedge rclk);
    rrst_n = 1;
    for (int c = 0; c < 20; c++) begin
      @(negedge rclk);
      while (!r_avail) @(negedge rclk);
      checks++;
      if (r_tag != 8'(c)) begin failures++; $display("FAIL tag %0d", r_tag); end
      for (int a = 0; a < DEPTH; a += 2) begin
        r_addr[0] = 4'(DEPTH - 1 - a); r_addr[1] = 4'(a);
        @(negedge rclk);
        checks++;
        if (r_data[0] != pat(c, DEPTH - 1 - a) || r_data[1] != pat(c, a)) begin
          failures++;
          $display("FAIL cell %0d addr %0d", c, a);
        end
        if (c < 10) repeat (3) @(negedge rclk);   // slow reader
      end
      checks++;
      if (r_more && !r_avail) begin failures++; $display("FAIL r_more without r_avail"); end
      if (r_more) more_seen++;
      r_done = 1;
      @(negedge rclk);
      r_done = 0;
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL backpressure never seen"); end
    checks++;
    if (more_seen == 0) begin failures++; $display("FAIL both banks never full at once"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
