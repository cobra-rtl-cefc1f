// tb_seq_isqrt: 48-bit sequential integer square root. Perfect squares,
// their neighbours, zero, one, the largest value and random values of
// random widths are compared with floor(sqrt(x)) by the property
// r*r <= x < (r+1)*(r+1); done must come a fixed 24 + 1 cycles after start.
module tb_seq_isqrt;
  localparam int W = 48;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done;
  logic [W-1:0] x;
  logic [W/2-1:0] root;
  int checks = 0, failures = 0;
  seq_isqrt #(.W(W)) dut (.*);

  task automatic one(logic [W-1:0] v);
    int cyc;
    longint unsigned r;
    @(negedge clk); x = v; start = 1;
    @(negedge clk); start = 0; x = 'x;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    r = longint'(root);
    checks += 2;
    if (!(r * r <= longint'(v) && longint'(v) < (r + 1) * (r + 1))) begin
      failures++; $display("isqrt(%0d) = %0d", v, root);
    end
    if (cyc != W / 2 + 1) begin failures++; $display("done after %0d cycles", cyc); end
  endtask

  initial begin
    rst_n = 0; start = 0; x = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    one(0); one(1); one(2); one(3); one(4); one('1);
    for (int k = 2; k < 70; k += 7) begin one(k * k - 1); one(k * k); one(k * k + 1); end
    one(48'(64'd16777215 * 64'd16777215));
    repeat (300) one({$urandom, $urandom} >> $urandom_range(W - 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
