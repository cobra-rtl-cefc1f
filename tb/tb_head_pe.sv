// tb_head_pe: random head datapacks through one HEAD PE in both operand
// schemes. Checks the ACC result (2*ones(op) - thr, with op the XNOR or
// the AND of the operands), the SPS bit with and without mask, the
// one-cycle latency and the DC HEAD zero count over rows of 8 invocations.
module tb_head_pe;
  localparam int DH = 64, BO = 13;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, first, use_and, count_dc, mask;
  logic signed [BO-1:0] thr, acc;
  logic [DH-1:0] a, b;
  logic sps;
  logic [BO-1:0] dc_head;
  int checks = 0, failures = 0;
  head_pe #(.DH(DH), .BO(BO)) dut (.*);

  initial begin
    int zeros;
    rst_n = 0; in_valid = 0; first = 0; use_and = 0; count_dc = 0; mask = 0; thr = 0; a = 0; b = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    zeros = 0;
    for (int t = 0; t < 800; t++) begin
      int exp_acc, ones;
      logic exp_sps;
      @(negedge clk);
      in_valid = 1;
      first    = (t % 8 == 0);
      use_and  = (t / 200) % 2;
      count_dc = (t >= 400);
      mask     = ($urandom_range(5) == 0);
      thr      = BO'(64 + int'($urandom_range(16)) - 8);
      a = {$urandom, $urandom}; b = {$urandom, $urandom};
      ones = 0;
      for (int i = 0; i < DH; i++) ones += use_and ? int'(a[i] & b[i]) : int'(a[i] == b[i]);
      exp_acc = 2 * ones - int'(thr);
      exp_sps = (exp_acc >= 0) && !mask;
      if (first) zeros = 0;
      if (count_dc && !exp_sps) zeros++;
      @(posedge clk);
      #1;
      checks += 3;
      if (int'(acc) != exp_acc) begin failures++; $display("t=%0d acc %0d expected %0d", t, acc, exp_acc); end
      if (sps != exp_sps) begin failures++; $display("t=%0d sps %0d expected %0d", t, sps, exp_sps); end
      if (int'(dc_head) != zeros) begin failures++; $display("t=%0d dc %0d expected %0d", t, dc_head, zeros); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
