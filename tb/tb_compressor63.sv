// tb_compressor63: exhaustive test of the 6:3 compressor against a bit
// count done by a loop.
module tb_compressor63;
  logic [5:0] in;
  logic [2:0] cnt;
  int checks = 0, failures = 0;
  compressor63 dut (.in, .cnt);
  initial begin
    for (int a = 0; a < 64; a++) begin
      int n;
      in = 6'(a);
      #1;
      n = 0;
      for (int b = 0; b < 6; b++) if (a & (1 << b)) n++;
      checks++;
      if (int'(cnt) != n) begin failures++; $display("in=%b cnt=%0d expected %0d", in, cnt, n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
