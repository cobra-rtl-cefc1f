// tb_sdp_ram: masked writes and one-cycle reads of the buffer RAM against
// a shadow array.
module tb_sdp_ram;
  localparam int W = 40, N = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we;
  logic [3:0] waddr, raddr;
  logic [W-1:0] wdata, wmask, rdata;
  logic [W-1:0] shadow [N];
  int checks = 0, failures = 0;
  sdp_ram #(.WIDTH(W), .DEPTH(N)) dut (.clk, .we, .waddr, .wdata, .wmask, .raddr, .rdata);
  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0; wmask = 0;
    // fill fully
    for (int a = 0; a < N; a++) begin
      @(negedge clk); we = 1; waddr = 4'(a); wdata = {$urandom, $urandom}; wmask = '1; shadow[a] = wdata;
    end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      we = $urandom_range(1); waddr = 4'($urandom); wdata = {$urandom, $urandom}; wmask = {$urandom, $urandom};
      raddr = 4'($urandom);
      @(posedge clk);
      #1;
      checks++;
      if (rdata !== shadow[raddr]) begin failures++; $display("read %0d: %h expected %h", raddr, rdata, shadow[raddr]); end
      if (we) shadow[waddr] = (shadow[waddr] & ~wmask) | (wdata & wmask);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
