// tb_tx_serial_stage: the stage sends ordered sets while init_mode is high,
// then three cells back to back. init_mode is released right after a comma, so
// the stage must first finish the pair (one-byte delay); the first cell byte
// must follow a D21.4. Symbols are decoded with dec8b10b and checked: only
// K28.5/D21.4 pairs before the cells, every cell byte in order, no gap between
// cells (608 symbols each), no disparity errors. Then the buffer is left
// empty and the underflow flag must rise.
module tb_tx_serial_stage;
  import link_pkg::*;
  logic clk = 0, rst_n = 0;
  logic init_mode, in_avail, in_done, sending_cells, underflow;
  logic [9:0] in_addr, tx_sym;
  logic [7:0] in_data;
  int checks = 0, failures = 0;

  tx_serial_stage dut (.*);
  always #4 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte unsigned cells [3][608];
  int rd_cell = 0;
  always @(posedge clk) in_data <= cells[rd_cell < 3 ? rd_cell : 2][in_addr];
  always @(posedge clk) if (rst_n && in_done) rd_cell <= rd_cell + 1;
  assign in_avail = rd_cell < 3;

  logic rd = 0, rd_o, k, err;
  logic [7:0] d;
  dec8b10b u_ref (.sym(tx_sym), .rd_in(rd), .data(d), .k(k), .err(err), .rd_out(rd_o));

  initial begin
    int n_os = 0, pos = 0, cellno = 0, errs = 0, seen_cell = 0;
    logic prev_k = 0, prev_d214 = 0;
    foreach (cells[i, j]) cells[i][j] = byte'($urandom);
    init_mode = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    fork
      begin
        // wait until a comma is being selected, then release init
        repeat (40) @(negedge clk);
        while (!(dut.phase == 1'b0 && !dut.in_cell)) @(negedge clk);
        @(negedge clk);   // comma issued; D21.4 must follow
        init_mode = 0;
      end
    join_none
    // monitor the symbols
    for (int s = 0; s < 3000; s++) begin
      @(posedge clk); #1;
      if (s < 3) continue;      // encoder pipeline fill
      if (err) errs++;
      rd = rd_o;
      if (cellno < 3 && (seen_cell || (!k && !(d == D21_4 && prev_k)))) begin
        if (!seen_cell) begin
          checks++;
          if (!prev_d214) begin failures++; $display("FAIL first cell byte not after D21.4"); end
          seen_cell = 1;
        end
        checks++;
        if (d != cells[cellno][pos] || k) begin
          failures++;
          if (failures < 10) $display("FAIL cell %0d byte %0d got %h exp %h", cellno, pos, d, cells[cellno][pos]);
        end
        pos++;
        if (pos == 608) begin pos = 0; cellno++; end
      end else if (!seen_cell) begin
        n_os++;
      end
      prev_d214 = (d == D21_4) && !k;
      prev_k = k;
    end
    checks++;
    if (errs != 0 || n_os < 20) begin failures++; $display("FAIL errs %0d os %0d", errs, n_os); end
    checks++;
    if (cellno != 3) begin failures++; $display("FAIL cells sent %0d", cellno); end
    checks++;
    if (!underflow || !sending_cells) begin failures++; $display("FAIL underflow not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
