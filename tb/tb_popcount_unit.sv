// tb_popcount_unit: random and corner-case vectors through the popcount
// unit at the head width (64 bits, two 36-bit groups) and at 40 bits,
// compared with a bit count done by a loop.
module tb_popcount_unit;
  logic [63:0] b64;
  logic [6:0]  c64;
  logic [39:0] b40;
  logic [5:0]  c40;
  int checks = 0, failures = 0;
  popcount_unit #(.W(64)) dut64 (.bits(b64), .count(c64));
  popcount_unit #(.W(40)) dut40 (.bits(b40), .count(c40));
  function automatic int ref_count(input logic [63:0] v);
    int n = 0;
    for (int i = 0; i < 64; i++) n += int'(v[i]);
    return n;
  endfunction
  initial begin
    for (int t = 0; t < 2000; t++) begin
      case (t)
        0: b64 = '0;
        1: b64 = '1;
        2: b64 = 64'hFFFF_FFFF_F000_0000;
        default: b64 = {$urandom, $urandom} & ((t % 3 == 0) ? {$urandom, $urandom} : '1);
      endcase
      b40 = b64[39:0];
      #1;
      checks += 2;
      if (int'(c64) != ref_count(b64)) begin failures++; $display("64: %h -> %0d", b64, c64); end
      if (int'(c40) != ref_count({24'd0, b40})) begin failures++; $display("40: %h -> %0d", b40, c40); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
