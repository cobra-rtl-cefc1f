// tb_cobra_full: one complete encoder layer of BERT-base size with the
// accelerator at its default configuration (l = 512, d = 768, h = 12,
// FF = 4d, 32 PEs), a padding mask of 400 valid tokens, and every output
// value compared with the reference model of cobra_env.
module tb_cobra_full;
  import cobra_pkg::*;
  localparam int unsigned H = H_DEF;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, start, busy, done, bus_err, finished;
  logic [7:0] step;
  cobra_cfg_t cfg;
  logic signed [15:0] sps_t [H];
  int checks, failures;
  int n_cycles = 0;

  logic [31:0] araddr, awaddr;
  logic [7:0] arlen, awlen;
  logic [2:0] arsize, awsize;
  logic [1:0] arburst, awburst, bresp;
  logic arvalid, arready, rlast, rvalid, rready, awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [127:0] rdata, wdata;
  logic [15:0] wstrb;

  cobra_top dut (
    .clk, .rst_n, .start, .busy, .done, .cfg, .sps_t, .step, .bus_err,
    .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst),
    .m_arvalid(arvalid), .m_arready(arready), .m_rdata(rdata), .m_rlast(rlast),
    .m_rvalid(rvalid), .m_rready(rready), .m_awaddr(awaddr), .m_awlen(awlen),
    .m_awsize(awsize), .m_awburst(awburst), .m_awvalid(awvalid), .m_awready(awready),
    .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast), .m_wvalid(wvalid), .m_wready(wready),
    .m_bresp(bresp), .m_bvalid(bvalid), .m_bready(bready)
  );

  cobra_env #(.MASK_MODE(MASK_PAD), .MASK_LEN(400), .SEED(3)) env (
    .clk, .rst_n, .start, .done, .cfg, .sps_t,
    .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst),
    .m_arvalid(arvalid), .m_arready(arready), .m_rdata(rdata), .m_rlast(rlast),
    .m_rvalid(rvalid), .m_rready(rready), .m_awaddr(awaddr), .m_awlen(awlen),
    .m_awsize(awsize), .m_awburst(awburst), .m_awvalid(awvalid), .m_awready(awready),
    .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast), .m_wvalid(wvalid), .m_wready(wready),
    .m_bresp(bresp), .m_bvalid(bvalid), .m_bready(bready),
    .finished, .checks, .failures
  );

  always @(posedge clk) if (rst_n && !finished) n_cycles++;

  initial begin
    @(posedge clk iff finished);
    $display("layer finished after %0d cycles", n_cycles);
    if (bus_err) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog: layer did not finish (step %0d)", step);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
