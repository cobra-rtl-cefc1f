// tb_cobra_ctrl: control unit with R = 2 FFN chunks. The data path is
// replaced by a responder that answers each op_start with op_done after a
// random delay. The descriptors handed out must follow the encoder-layer
// sequence listed here, one op_start per operation, with no new operation
// before op_done; done must pulse after the last operation and busy must
// cover the whole layer. The layer is run twice to check the restart.
module tb_cobra_ctrl;
  import cobra_pkg::*;
  localparam int R = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done, op_start, op_done;
  op_desc_t op;
  logic [7:0] step;
  int checks = 0, failures = 0;

  cobra_ctrl #(.R(R)) dut (.*);

  // expected sequence: {op, mat, vec, slot, mode, dst, r, ln}
  op_desc_t exp_q [$];
  function automatic op_desc_t dsc(op_e o, int mat = 0, int vec = 0, vslot_e sl = VS_BIAS,
                                   rbmm_mode_e m = MODE_M1, rbmm_dst_e d = DST_Q, int r = 0, bit ln = 0);
    return '{op: o, mat: 5'(mat), vec: 5'(vec), slot: sl, mode: m, dst: d, r: 4'(r), ln: ln};
  endfunction
  task automatic build();
    exp_q.delete();
    exp_q.push_back(dsc(OP_LOADX));
    exp_q.push_back(dsc(OP_BINX));
    exp_q.push_back(dsc(OP_LOADW, 0));
    exp_q.push_back(dsc(OP_LOADV, 0, 0));
    exp_q.push_back(dsc(OP_RUN, 0, 0, VS_BIAS, MODE_M1, DST_Q));
    exp_q.push_back(dsc(OP_LOADW, 1));
    exp_q.push_back(dsc(OP_LOADV, 0, 1));
    exp_q.push_back(dsc(OP_RUN, 0, 0, VS_BIAS, MODE_M1, DST_K));
    exp_q.push_back(dsc(OP_LOADW, 2));
    exp_q.push_back(dsc(OP_LOADV, 0, 2));
    exp_q.push_back(dsc(OP_RUN, 0, 0, VS_BIAS, MODE_M1, DST_V));
    exp_q.push_back(dsc(OP_RUN, 0, 0, VS_BIAS, MODE_M2, DST_S));
    exp_q.push_back(dsc(OP_LOADV, 0, 3));
    exp_q.push_back(dsc(OP_RUN, 0, 0, VS_BIAS, MODE_M3, DST_CTX));
    exp_q.push_back(dsc(OP_LOADW, 3));
    exp_q.push_back(dsc(OP_RUN, 0, 0, VS_BIAS, MODE_M4, DST_E));
    exp_q.push_back(dsc(OP_LOADV, 0, 4 + R, VS_GAMMA));
    exp_q.push_back(dsc(OP_LOADV, 0, 5 + R, VS_BETA));
    exp_q.push_back(dsc(OP_LN));
    for (int r = 0; r < R; r++) begin
      exp_q.push_back(dsc(OP_LOADW, 4 + 2 * r, 0, VS_BIAS, MODE_M1, DST_Q, r));
      exp_q.push_back(dsc(OP_LOADV, 0, 4 + r, VS_BIAS, MODE_M1, DST_Q, r));
      exp_q.push_back(dsc(OP_RUN, 0, 0, VS_BIAS, MODE_F1, DST_H, r));
      exp_q.push_back(dsc(OP_LOADW, 5 + 2 * r, 0, VS_BIAS, MODE_M1, DST_Q, r));
      exp_q.push_back(dsc(OP_RUN, 0, 0, VS_BIAS, MODE_F2, DST_E, r));
    end
    exp_q.push_back(dsc(OP_LOADV, 0, 6 + R, VS_GAMMA));
    exp_q.push_back(dsc(OP_LOADV, 0, 7 + R, VS_BETA));
    exp_q.push_back(dsc(OP_LN, 0, 0, VS_BIAS, MODE_M1, DST_Q, 0, 1));
    exp_q.push_back(dsc(OP_STORE));
  endtask

  // responder
  int pending = 0, n_ops = 0;
  always @(posedge clk) begin
    op_done <= 0;
    if (op_start) begin
      op_desc_t e;
      checks += 2;
      if (pending != 0) begin failures++; $display("op_start while an operation is running"); end
      if (exp_q.size() == 0) begin failures++; $display("extra operation"); end
      else begin
        e = exp_q.pop_front();
        if (op !== e) begin failures++; $display("operation %0d: got %p expected %p", n_ops, op, e); end
      end
      n_ops++;
      pending = 1 + $urandom_range(6);
    end else if (pending > 0) begin
      pending--;
      if (pending == 0) op_done <= 1;
    end
  end

  task automatic layer();
    build();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin
      @(negedge clk);
      if (!done) begin checks++; if (!busy) begin failures++; $display("busy low during the layer"); end end
    end
    checks += 2;
    if (exp_q.size() != 0) begin failures++; $display("%0d operations not issued", exp_q.size()); end
    @(negedge clk);
    if (busy || done) failures++;
  endtask

  initial begin
    rst_n = 0; start = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    layer();
    repeat (3) @(negedge clk);
    layer();
    checks++;
    if (n_ops != 2 * (23 + 5 * R)) begin failures++; $display("%0d operations", n_ops); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
