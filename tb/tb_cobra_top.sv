// tb_cobra_top: end-to-end test of the accelerator at a reduced size
// (l = 16, d = 32, h = 2, R = 2, 8 PEs): one full encoder layer with a
// causal attention mask is loaded from the behavioural DDR, computed and
// stored; every output value is compared with the reference model of
// cobra_env. The test also counts how often each mechanism occurred (every
// RBMM mode, masked SPS elements, DC INPUT use, F2 accumulation, both
// LayerNorms, AXI stalls in both directions, multi-burst transfers) and
// counts a failure for any that never happened.
module tb_cobra_top;
  import cobra_pkg::*;
  localparam int unsigned L = 16, D = 32, H = 2, R = 2, NPE = 8, BO = 13;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, start, busy, done, bus_err, finished;
  logic [7:0] step;
  cobra_cfg_t cfg;
  logic signed [15:0] sps_t [H];
  int env_checks, env_failures;

  logic [31:0] araddr, awaddr;
  logic [7:0] arlen, awlen;
  logic [2:0] arsize, awsize;
  logic [1:0] arburst, awburst, bresp;
  logic arvalid, arready, rlast, rvalid, rready, awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [127:0] rdata, wdata;
  logic [15:0] wstrb;

  cobra_top #(.L(L), .D(D), .H(H), .R(R), .NPE(NPE), .BO(BO)) dut (
    .clk, .rst_n, .start, .busy, .done, .cfg, .sps_t, .step, .bus_err,
    .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst),
    .m_arvalid(arvalid), .m_arready(arready), .m_rdata(rdata), .m_rlast(rlast),
    .m_rvalid(rvalid), .m_rready(rready), .m_awaddr(awaddr), .m_awlen(awlen),
    .m_awsize(awsize), .m_awburst(awburst), .m_awvalid(awvalid), .m_awready(awready),
    .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast), .m_wvalid(wvalid), .m_wready(wready),
    .m_bresp(bresp), .m_bvalid(bvalid), .m_bready(bready)
  );

  cobra_env #(.L(L), .D(D), .H(H), .R(R), .BO(BO), .MASK_MODE(MASK_CAUSAL), .SEED(7)) env (
    .clk, .rst_n, .start, .done, .cfg, .sps_t,
    .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst),
    .m_arvalid(arvalid), .m_arready(arready), .m_rdata(rdata), .m_rlast(rlast),
    .m_rvalid(rvalid), .m_rready(rready), .m_awaddr(awaddr), .m_awlen(awlen),
    .m_awsize(awsize), .m_awburst(awburst), .m_awvalid(awvalid), .m_awready(awready),
    .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast), .m_wvalid(wvalid), .m_wready(wready),
    .m_bresp(bresp), .m_bvalid(bvalid), .m_bready(bready),
    .finished, .checks(env_checks), .failures(env_failures)
  );

  // mechanism counters
  int n_mode [6];
  int n_mask, n_dcin, n_f2acc, n_ln, n_rstall, n_wstall, n_bursts, n_cycles;
  initial begin
    for (int m = 0; m < 6; m++) n_mode[m] = 0;
    n_mask = 0; n_dcin = 0; n_f2acc = 0; n_ln = 0; n_rstall = 0; n_wstall = 0; n_bursts = 0; n_cycles = 0;
  end
  always @(posedge clk) if (rst_n) begin
    n_cycles++;
    if (dut.op_start && dut.op.op == OP_RUN) n_mode[int'(dut.op.mode)]++;
    if (dut.e_v && dut.op.mode == MODE_M2 && dut.e_mask != 0) n_mask++;
    if (dut.e_v && dut.eng_dcin != 0) n_dcin++;
    if (dut.e_v && dut.op.mode == MODE_F2 && dut.op.r != 0) n_f2acc++;
    if (dut.op_start && dut.op.op == OP_LN) n_ln++;
    if (dut.u_dma.rs == dut.u_dma.R_DATA && !rvalid) n_rstall++;
    if (wvalid && !wready) n_wstall++;
    if (arvalid && arready) n_bursts++;
  end

  int checks = 0, failures = 0;
  int s_checks = 0, s_failures = 0;
  // binarised LayerNorm-1 output, taken when the first LayerNorm ends
  always @(posedge clk) if (rst_n && dut.busy && dut.ln_done && !dut.op.ln) begin
    @(posedge clk);
    for (int i = 0; i < L; i++) begin
      s_checks++;
      if (dut.u_abuf.mem[i] !== env.xb[i]) begin
        s_failures++; $display("LayerNorm-1 row %0d signs differ %h %h", i, dut.u_abuf.mem[i], env.xb[i]);
      end
    end
  end
  for (genvar k = 0; k < H; k++) begin : g_schk
    initial begin
      @(posedge clk iff finished);
      for (int i = 0; i < L; i++) begin
        s_checks++;
        if (dut.g_sbuf[k].u_s.mem[i] !== L'(env.s[k][i])) begin
          s_failures++; $display("score head %0d row %0d differs", k, i);
        end
      end
    end
  end
  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never exercised: %s", what); end
    else $display("  %-26s %0d", what, n);
  endtask

  initial begin
    @(posedge clk iff finished);
    @(posedge clk);
    checks += env_checks; failures += env_failures;
    // intermediate buffers against the reference
    for (int i = 0; i < L; i++) begin
      checks += 3;
      if (dut.u_abuf.mem[3*L + i] !== env.hb[i]) begin failures++; $display("FFN hidden row %0d differs %h %h dcf=%0d", i, dut.u_abuf.mem[3*L + i], env.hb[i], dut.u_dcf.mem[i]); end
      if (dut.u_abuf.mem[L + i] !== env.qb[i]) begin failures++; $display("Q row %0d differs", i); end
      if (dut.u_abuf.mem[2*L + i] !== env.ctx[i]) begin failures++; $display("context row %0d differs", i); end
      for (int c = 0; c < D; c++) begin
        logic [NPE*BO-1:0] w;
        w = dut.u_ebuf.mem[i * (D/NPE) + c / NPE];
        checks++;
        if (int'(signed'(w[(c % NPE) * BO +: BO])) != env.eint[i][c]) begin
          failures++;
          if (failures < 530) $display("FFN output (%0d,%0d) got %0d expected %0d", i, c,
                                      signed'(w[(c % NPE) * BO +: BO]), env.eint[i][c]);
        end
      end
    end
    checks += s_checks; failures += s_failures;
    $display("layer finished after %0d cycles", n_cycles);
    need("M1 runs", n_mode[0]);
    need("M2 runs", n_mode[1]);
    need("M3 runs", n_mode[2]);
    need("M4 runs", n_mode[3]);
    need("F1 runs", n_mode[4]);
    need("F2 runs", n_mode[5]);
    need("masked M2 invocations", n_mask);
    need("DC INPUT invocations", n_dcin);
    need("F2 accumulations", n_f2acc);
    need("LayerNorm passes", n_ln);
    need("AXI read stall cycles", n_rstall);
    need("AXI write stall cycles", n_wstall);
    need("read bursts", n_bursts);
    checks++; if (n_mode[0] != 3 || n_mode[5] != R || n_ln != 2) failures++;
    checks++; if (bus_err) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog: layer did not finish (step %0d)", step);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
