// tb_dec8b10b: checks the 8B/10B decoder on published code words, on every
// byte value encoded at both running disparities (by the reference encoder
// function), on K28.5, and on error detection: invalid sub-blocks and
// symbols whose disparity does not match the running disparity.
module tb_dec8b10b;
  import link_pkg::*;
  logic [9:0] sym;
  logic rd_in, k, err, rd_out;
  logic [7:0] data;
  int checks = 0, failures = 0;

  dec8b10b dut (.*);

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  initial begin
    logic [10:0] e;
    // published code words at running disparity -
    sym = 10'b1001110100; rd_in = 0; #1;
    chk(data == 8'h00 && !k && !err && rd_out == 0, "D0.0");
    sym = 10'b1010101010; rd_in = 0; #1;
    chk(data == 8'hB5 && !k && !err && rd_out == 0, "D21.5");
    sym = 10'b0011111010; rd_in = 0; #1;
    chk(data == 8'hBC && k && !err && rd_out == 1, "K28.5-");
    sym = 10'b1100000101; rd_in = 1; #1;
    chk(data == 8'hBC && k && !err && rd_out == 0, "K28.5+");
    sym = 10'b1000110111; rd_in = 0; #1;
    chk(data == 8'hF1 && !err, "D17.7 A7");
    // round trip of all bytes
    for (int rd = 0; rd < 2; rd++)
      for (int d = 0; d < 256; d++) begin
        e = enc8b10b_f(8'(d), 1'b0, rd[0]);
        sym = e[9:0]; rd_in = rd[0]; #1;
        chk(data == 8'(d) && !k && !err && rd_out == e[10], $sformatf("byte %0d rd %0d", d, rd));
      end
    // errors: all-zero / all-one sub-blocks, wrong disparity
    sym = 10'b0000001010; rd_in = 0; #1; chk(err, "invalid 6b");
    sym = 10'b1111111010; rd_in = 1; #1; chk(err, "invalid 6b ones");
    sym = 10'b0011111010; rd_in = 1; #1; chk(err, "K28.5- at rd+");
    sym = 10'b1001110100; rd_in = 1; #1; chk(err, "D0.0- at rd+");
    sym = 10'b1010101111; rd_in = 0; #1; chk(err, "invalid 4b");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
