// tb_seq_div: 48-bit sequential divider. Edge cases (zero dividend, divisor
// one, dividend below divisor, largest values, zero divisor) and random
// operand pairs of random widths are compared with the integer quotient;
// done must come a fixed 48 + 1 cycles after start.
module tb_seq_div;
  localparam int W = 48;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done;
  logic [W-1:0] dividend, divisor, quotient;
  int checks = 0, failures = 0;
  seq_div #(.W(W)) dut (.*);

  task automatic one(logic [W-1:0] a, logic [W-1:0] b);
    int cyc;
    logic [W-1:0] e;
    e = (b == 0) ? '1 : a / b;
    @(negedge clk); dividend = a; divisor = b; start = 1;
    @(negedge clk); start = 0; dividend = 'x; divisor = 'x;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (quotient != e) begin failures++; $display("%0d / %0d = %0d, expected %0d", a, b, quotient, e); end
    if (cyc != W + 1) begin failures++; $display("done after %0d cycles", cyc); end
  endtask

  initial begin
    rst_n = 0; start = 0; dividend = 0; divisor = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    one(0, 5); one(12345, 1); one(3, 7); one('1, 1); one('1, '1); one('1, 3); one(100, 0);
    one(48'h10000, 181); one(48'd786432, 768);
    repeat (300) begin
      logic [W-1:0] a, b;
      a = {$urandom, $urandom} >> $urandom_range(W - 1);
      b = {$urandom, $urandom} >> $urandom_range(W - 1);
      one(a, b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
