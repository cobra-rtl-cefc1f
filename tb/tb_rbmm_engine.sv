// tb_rbmm_engine: RBMM engine with d = 48, h = 4, 4 PEs. Rows of 3
// back-to-back invocations (random gaps between rows) are issued in every
// mode. A model computes each PE's result from the operands, plus the
// per-row DC HEAD sums (zero SPS outputs per head over all PEs, M2) and the
// DC FULL sum (zero binary results, F1). The checks cover every output, the
// tag and first/last side band, the 4-cycle latency and II = 1.
module tb_rbmm_engine;
  import cobra_pkg::*;
  localparam int D = 48, H = 4, NPE = 4, BO = 13, TAGW = 16, DH = D / H, RL = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_first, in_last, out_valid, out_first, out_last;
  logic [TAGW-1:0] in_tag, out_tag;
  rbmm_mode_e mode;
  logic [NPE-1:0] mask;
  logic [D-1:0] a;
  logic [D-1:0] b [NPE];
  logic signed [BO-1:0] thr [H];
  logic signed [BO-1:0] bias [NPE];
  logic signed [BO-1:0] prev [NPE];
  logic signed [BO-1:0] out [NPE];
  logic [BO-1:0] dc_in, dc_full_sum;
  logic [BO-1:0] dc_head_sum [H];
  int checks = 0, failures = 0;
  rbmm_engine #(.D(D), .H(H), .NPE(NPE), .BO(BO), .TAGW(TAGW)) dut (.*);

  typedef struct {
    int out [NPE];
    int tag;
    bit first, last, m2, f1;
    int dch [H];
    int dcf;
  } exp_t;
  exp_t q [$];
  logic [3:0] vhist = '0;
  int n_mode [6];

  task automatic check_out();
    exp_t e;
    checks++;
    if (out_valid !== vhist[2]) begin failures++; $display("out_valid %b history %b", out_valid, vhist); end
    if (out_valid && q.size() > 0) begin
      e = q.pop_front();
      checks += NPE + 3;
      for (int p = 0; p < NPE; p++)
        if (int'(out[p]) != e.out[p]) begin failures++; $display("PE %0d out %0d expected %0d", p, out[p], e.out[p]); end
      if (int'(out_tag) != e.tag) begin failures++; $display("tag %0d expected %0d", out_tag, e.tag); end
      if (out_first != e.first || out_last != e.last) begin failures++; $display("first/last wrong"); end
      if (e.last && e.f1) begin
        checks++;
        if (int'(dc_full_sum) != e.dcf) begin failures++; $display("dc_full_sum %0d expected %0d", dc_full_sum, e.dcf); end
      end
      if (e.last && e.m2)
        for (int k = 0; k < H; k++) begin
          checks++;
          if (int'(dc_head_sum[k]) != e.dch[k]) begin failures++; $display("dc_head_sum[%0d] %0d expected %0d", k, dc_head_sum[k], e.dch[k]); end
        end
    end
  endtask

  task automatic tick();
    @(negedge clk);
    check_out();
    vhist = {vhist[2:0], in_valid};
  endtask

  initial begin
    int tag;
    int dch [H];
    int dcf;
    for (int m = 0; m < 6; m++) n_mode[m] = 0;
    rst_n = 0; in_valid = 0; in_first = 0; in_last = 0; in_tag = 0; mode = MODE_M1;
    mask = 0; a = 0; dc_in = 0;
    for (int p = 0; p < NPE; p++) begin b[p] = 0; bias[p] = 0; prev[p] = 0; end
    for (int k = 0; k < H; k++) thr[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    tag = 0;
    for (int row = 0; row < 240; row++) begin
      rbmm_mode_e rm;
      rm = rbmm_mode_e'(row % 6);
      n_mode[row % 6]++;
      for (int k = 0; k < H; k++) dch[k] = 0;
      dcf = 0;
      repeat ($urandom_range(2)) begin tick(); in_valid = 0; end
      for (int j = 0; j < RL; j++) begin
        exp_t e;
        bit us;
        tick();
        in_valid = 1; in_first = (j == 0); in_last = (j == RL - 1);
        in_tag = TAGW'(tag); mode = rm;
        us = (rm == MODE_M3 || rm == MODE_F2);
        a = {$urandom, $urandom};
        mask = NPE'($urandom);
        dc_in = BO'($urandom_range(D));
        for (int k = 0; k < H; k++) thr[k] = BO'(DH + int'($urandom_range(4)) - 2);
        e.tag = tag; e.first = in_first; e.last = in_last;
        e.m2 = (rm == MODE_M2); e.f1 = (rm == MODE_F1);
        for (int p = 0; p < NPE; p++) begin
          int sum;
          bit [H-1:0] cat;
          b[p] = {$urandom, $urandom};
          bias[p] = BO'(int'($urandom_range(8)) - 4);
          prev[p] = BO'(int'($urandom_range(100)) - 50);
          sum = us ? int'(dc_in) : 0;
          for (int k = 0; k < H; k++) begin
            int ones, hacc;
            ones = 0;
            for (int i = k * DH; i < (k + 1) * DH; i++) ones += us ? int'(a[i] & b[p][i]) : int'(a[i] == b[p][i]);
            hacc = 2 * ones - int'(thr[k]);
            cat[k] = (hacc >= 0) && !mask[p];
            if (rm == MODE_M2 && !cat[k]) dch[k]++;
            sum += hacc;
          end
          case (rm)
            MODE_M4: e.out[p] = sum;
            MODE_F2: e.out[p] = sum + int'(prev[p]);
            MODE_M2: e.out[p] = int'(cat);
            default: e.out[p] = int'(sum >= int'(bias[p]));
          endcase
          if (rm == MODE_F1 && sum < int'(bias[p])) dcf++;
        end
        e.dch = dch; e.dcf = dcf;
        q.push_back(e);
        tag++;
      end
    end
    tick(); in_valid = 0;
    repeat (8) tick();
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
