// tb_rbmm_rw_ctrl: RBMM read/write control with l = 16, d = 32, h = 2,
// 8 PEs. Every mode is run with no, padding and causal masks; each issued
// invocation (k, i, g, first/last flags, lane masks) is compared with the
// loop nest written out independently here, one invocation per cycle with
// no gaps, and done must rise DRAIN + 1 cycles after the last invocation.
module tb_rbmm_rw_ctrl;
  import cobra_pkg::*;
  localparam int L = 16, D = 32, H = 2, NPE = 8, DRAIN = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done, iss_valid, iss_first, iss_last;
  rbmm_mode_e mode;
  mask_mode_e mask_mode;
  logic [$clog2(L+1)-1:0] mask_len;
  logic [$clog2(H)-1:0] iss_k;
  logic [$clog2(L)-1:0] iss_i;
  logic [15:0] iss_g;
  logic [NPE-1:0] iss_mask;
  int checks = 0, failures = 0;
  rbmm_rw_ctrl #(.L(L), .D(D), .H(H), .NPE(NPE), .DRAIN(DRAIN)) dut (.*);

  task automatic run(rbmm_mode_e m, mask_mode_e mm, int ml);
    int nk, ng, n, cyc, last_cyc;
    bit seen_done;
    nk = (m == MODE_M3) ? H : 1;
    ng = (m == MODE_M2) ? L / NPE : (m == MODE_M3) ? D / H / NPE : D / NPE;
    @(negedge clk);
    mode = m; mask_mode = mm; mask_len = ($clog2(L+1))'(ml); start = 1;
    @(negedge clk);
    start = 0;
    n = 0;
    for (int k = 0; k < nk; k++)
      for (int i = 0; i < L; i++)
        for (int g = 0; g < ng; g++) begin
          logic [NPE-1:0] em;
          for (int p = 0; p < NPE; p++) begin
            int j;
            j = g * NPE + p;
            em[p] = (m == MODE_M2) && ((mm == MASK_PAD && j >= ml) || (mm == MASK_CAUSAL && j > i));
          end
          checks++;
          if (!iss_valid || int'(iss_k) != (nk > 1 ? k : 0) || int'(iss_i) != i || int'(iss_g) != g ||
              iss_first != (g == 0) || iss_last != (g == ng - 1) || iss_mask !== em) begin
            failures++;
            if (failures < 10)
              $display("mode %0d: got v%b k%0d i%0d g%0d f%b l%b m%b, expected k%0d i%0d g%0d m%b",
                       m, iss_valid, iss_k, iss_i, iss_g, iss_first, iss_last, iss_mask, k, i, g, em);
          end
          n++;
          @(negedge clk);
        end
    // no further invocations; done DRAIN + 1 cycles after the last one
    seen_done = 0;
    for (int c = 1; c <= DRAIN + 2; c++) begin
      checks++;
      if (iss_valid) failures++;
      if (done) begin
        checks++;
        if (c != DRAIN + 1) begin failures++; $display("done %0d cycles after the last invocation", c); end
        seen_done = 1;
      end
      @(negedge clk);
    end
    checks += 2;
    if (!seen_done) begin failures++; $display("no done"); end
    if (busy) failures++;
  endtask

  initial begin
    rst_n = 0; start = 0; mode = MODE_M1; mask_mode = MASK_NONE; mask_len = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 6; m++) run(rbmm_mode_e'(m), MASK_NONE, L);
    run(MODE_M2, MASK_PAD, 11);
    run(MODE_M2, MASK_PAD, 3);
    run(MODE_M2, MASK_CAUSAL, 0);
    run(MODE_M1, MASK_CAUSAL, 0);   // masks only apply in M2
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
