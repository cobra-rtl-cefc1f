// tb_rbmm_pe: one RBMM PE (d = 24, h = 2) fed with a new random
// invocation every cycle in random modes. A model computes, from the
// operands alone, each mode's result (binary >= bias, integer, F2
// accumulation, H-bit SPS concatenation with mask) and the DC FULL count
// per row of four invocations; the results are checked three cycles after
// issue, which also checks the pipeline latency and II = 1.
module tb_rbmm_pe;
  import cobra_pkg::*;
  localparam int D = 24, H = 2, BO = 13, DH = D / H;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, first, mask, out_valid;
  rbmm_mode_e mode;
  logic [D-1:0] a, b;
  logic signed [BO-1:0] thr [H];
  logic signed [BO-1:0] bias, prev, out;
  logic [BO-1:0] dc_in, dc_full;
  logic [BO-1:0] dc_head [H];
  int checks = 0, failures = 0;
  rbmm_pe #(.D(D), .H(H), .BO(BO)) dut (.*);

  int exp_out [$];
  int exp_dcf [$];
  int n_mode [6];
  logic [2:0] vhist = '0;

  // called at each falling edge before new inputs are driven: the result of
  // an invocation issued three edges earlier must be on the outputs now
  task automatic check_out();
    int e, f;
    checks++;
    if (out_valid !== vhist[1]) begin
      failures++; $display("out_valid %b, issue history %b", out_valid, vhist);
    end
    if (out_valid) begin
      checks += 2;
      if (exp_out.size() == 0) begin failures++; $display("unexpected result"); end
      else begin
        e = exp_out.pop_front(); f = exp_dcf.pop_front();
        if (int'(out) != e) begin failures++; $display("out %0d expected %0d mode %0d", out, e, dut.m2); end
        if (int'(dc_full) != f) begin failures++; $display("dc_full %0d expected %0d", dc_full, f); end
      end
    end
  endtask

  initial begin
    int dcf;
    for (int m = 0; m < 6; m++) n_mode[m] = 0;
    rst_n = 0; in_valid = 0; first = 0; mask = 0; mode = MODE_M1; a = 0; b = 0;
    bias = 0; prev = 0; dc_in = 0; thr[0] = 0; thr[1] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    dcf = 0;
    for (int t = 0; t < 1200; t++) begin
      int hacc [H];
      int sum, res;
      logic bin;
      logic [H-1:0] cat;
      @(negedge clk);
      check_out();
      vhist = {vhist[1:0], in_valid};
      in_valid = ($urandom_range(9) != 0);
      if (in_valid) begin
        first = (t % 4 == 0);
        mode  = rbmm_mode_e'($urandom_range(5));
        n_mode[int'(mode)]++;
        mask  = $urandom_range(1);
        a = D'({$urandom}); b = D'({$urandom});
        for (int k = 0; k < H; k++) thr[k] = BO'(DH + int'($urandom_range(6)) - 3);
        bias  = BO'(int'($urandom_range(10)) - 5);
        prev  = BO'(int'($urandom_range(200)) - 100);
        dc_in = BO'($urandom_range(D));
        sum = (mode == MODE_M3 || mode == MODE_F2) ? int'(dc_in) : 0;
        for (int k = 0; k < H; k++) begin
          int ones;
          ones = 0;
          for (int i = k * DH; i < (k + 1) * DH; i++)
            ones += (mode == MODE_M3 || mode == MODE_F2) ? int'(a[i] & b[i]) : int'(a[i] == b[i]);
          hacc[k] = 2 * ones - int'(thr[k]);
          cat[k]  = (hacc[k] >= 0) && !mask;
          sum += hacc[k];
        end
        bin = (sum >= int'(bias));
        case (mode)
          MODE_M4: res = sum;
          MODE_F2: res = sum + int'(prev);
          MODE_M2: res = int'(cat);
          default: res = int'(bin);
        endcase
        if (first) dcf = 0;
        if (mode == MODE_F1 && !bin) dcf++;
        exp_out.push_back(res);
        exp_dcf.push_back(dcf);
      end
    end
    @(negedge clk); check_out(); vhist = {vhist[1:0], in_valid}; in_valid = 0;
    repeat (6) begin @(negedge clk); check_out(); vhist = {vhist[1:0], in_valid}; end
    checks++;
    if (exp_out.size() != 0) begin failures++; $display("%0d results missing", exp_out.size()); end
    for (int m = 0; m < 6; m++) begin checks++; if (n_mode[m] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
