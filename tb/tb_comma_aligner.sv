// tb_comma_aligner: feeds K28.5/D21.4 ordered sets at every bit offset 0..19
// and checks lock and the aligned output; then checks that a fake comma at
// another offset is ignored with align_en low and followed with align_en high.
module tb_comma_aligner;
  logic clk = 0, rst_n = 0;
  logic [19:0] din, dout;
  logic align_en, locked;
  int checks = 0, failures = 0;

  comma_aligner dut (.*);
  always #5 clk = ~clk;

  localparam logic [19:0] OS = 20'b0011111010_1010100010;   // K28.5-, D21.4+

  initial begin
    #10000000;
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

  // serial bit stream as a queue, sent 20 bits per clock
  bit q [$];
  task automatic push20(input logic [19:0] w);
    for (int b = 19; b >= 0; b--) q.push_back(w[b]);
  endtask
  task automatic tick();
    @(negedge clk);
    for (int b = 19; b >= 0; b--) din[b] = q.pop_front();
  endtask

  initial begin
    din = 0; align_en = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int off = 0; off < 20; off++) begin
      q.delete();
      for (int b = 0; b < off; b++) q.push_back(1'b1);
      repeat (12) push20(OS);
      repeat (10) tick();
      @(posedge clk); #1;
      chk(locked, $sformatf("locked at offset %0d", off));
      chk(dout == OS, $sformatf("aligned output at offset %0d: %b", off, dout));
    end
    // stream of data containing a fake comma 5 bits later; alignment frozen
    q.delete();
    repeat (12) push20(OS);
    repeat (10) tick();
    align_en = 0;
    push20(20'b10101_0011111010_10101);   // comma at bit offset 5
    push20(20'b1010101010_1010101010);
    repeat (2) push20(OS);
    repeat (6) tick();
    @(posedge clk); #1;
    chk(dout == OS && locked && dut.off == 5'd0, $sformatf("fake comma ignored when align_en=0 %b %0d %0d", dout, locked, dut.off));
    // same with align_en high: the aligner must move to the new offset
    align_en = 1;
    q.delete();
    repeat (4) push20(OS);
    push20(20'b10101_0011111010_10101);
    repeat (8) push20(20'b1010101010_1010101010);
    repeat (6) tick();
    @(posedge clk); #1;
    chk(dut.off == 5'd5 && !locked, "re-aligned on comma when align_en=1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
