// tb_axi_dma: AXI4 master DMA (128-bit data, bursts of at most 16 beats)
// against an AXI slave model here with random stalls on every channel.
// Reads and writes of 1 to 53 beats are checked for: every beat's index
// and data, burst lengths and addresses (INCR, no 4 KiB crossing, WLAST on
// the last beat), payloads held stable while VALID waits for READY, source
// data taken one cycle after src_req, DDR contents after the writes, the
// done pulses, and bus_err set by a SLVERR response.
module tb_axi_dma;
  localparam int DW = 128, AW = 32, CW = 24, MAXB = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, rd_start, rd_busy, rd_done, rd_beat_valid, wr_start, wr_busy, wr_done, src_req, bus_err;
  logic [AW-1:0] rd_addr, wr_addr;
  logic [CW-1:0] rd_beats, wr_beats, rd_beat_idx, src_idx;
  logic [DW-1:0] rd_beat_data, src_data;
  logic [AW-1:0] m_araddr, m_awaddr;
  logic [7:0] m_arlen, m_awlen;
  logic [2:0] m_arsize, m_awsize;
  logic [1:0] m_arburst, m_awburst, m_bresp;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready, m_awvalid, m_awready;
  logic m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [DW-1:0] m_rdata, m_wdata;
  logic [DW/8-1:0] m_wstrb;
  int checks = 0, failures = 0;

  axi_dma #(.DW(DW), .AW(AW), .MAXB(MAXB), .CW(CW)) dut (.*);

  function automatic logic [DW-1:0] pattern(int unsigned a);
    return {a * 32'h9e3779b1, ~a, a ^ 32'h5a5a5a5a, a};
  endfunction

  // ---------------- slave model ----------------
  logic [DW-1:0] mem [int unsigned];    // beat address -> data
  logic r_act, w_act, err_next;
  logic [AW-1:0] r_a, w_a;
  int r_n, w_n;
  int n_bursts = 0;

  function automatic void check_burst(logic [AW-1:0] a, logic [7:0] len, logic [2:0] size, logic [1:0] burst);
    checks += 4;
    if (int'(len) >= MAXB) begin failures++; $display("burst of %0d beats", len + 1); end
    if (size != 3'd4 || burst != 2'b01) failures++;
    if (a[3:0] != 0) failures++;
    if ((a >> 12) != ((a + (int'(len) + 1) * 16 - 1) >> 12)) begin failures++; $display("4 KiB crossing at %h", a); end
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      r_act <= 0; w_act <= 0; m_rvalid <= 0; m_bvalid <= 0; m_arready <= 0; m_awready <= 0; m_wready <= 0;
    end else begin
      m_arready <= !r_act && $urandom_range(2) == 0;
      if (m_arvalid && m_arready) begin
        check_burst(m_araddr, m_arlen, m_arsize, m_arburst);
        r_act <= 1; r_a <= m_araddr; r_n <= int'(m_arlen) + 1; m_arready <= 0; n_bursts++;
      end
      if (m_rvalid && m_rready) begin
        m_rvalid <= 0;
        r_a <= r_a + 16; r_n <= r_n - 1;
        if (r_n == 1) r_act <= 0;
      end else if (r_act && !m_rvalid && $urandom_range(3) != 0) begin
        m_rvalid <= 1;
        m_rdata  <= mem.exists(r_a / 16) ? mem[r_a / 16] : pattern(r_a / 16);
        m_rlast  <= (r_n == 1);
      end
      m_awready <= !w_act && !m_bvalid && $urandom_range(2) == 0;
      if (m_awvalid && m_awready) begin
        check_burst(m_awaddr, m_awlen, m_awsize, m_awburst);
        w_act <= 1; w_a <= m_awaddr; w_n <= int'(m_awlen) + 1; m_awready <= 0;
      end
      m_wready <= w_act && $urandom_range(2) != 0;
      if (m_wvalid && m_wready) begin
        checks += 2;
        if (m_wlast != (w_n == 1)) begin failures++; $display("WLAST wrong"); end
        if (m_wstrb != '1) failures++;
        mem[w_a / 16] = m_wdata;
        w_a <= w_a + 16; w_n <= w_n - 1;
        if (w_n == 1) begin w_act <= 0; m_wready <= 0; m_bvalid <= 1; m_bresp <= err_next ? 2'b10 : 2'b00; end
      end
      if (m_bvalid && m_bready) m_bvalid <= 0;
    end
  end

  // VALID held with a stable payload until READY
  logic [AW+8:0] ar_q, aw_q;
  logic [DW:0]   w_q;
  logic ar_p = 0, aw_p = 0, w_p = 0;
  always @(posedge clk) if (rst_n) begin
    if (ar_p) begin checks++; if (!m_arvalid || {m_araddr, m_arlen} != ar_q) begin failures++; $display("AR dropped"); end end
    if (aw_p) begin checks++; if (!m_awvalid || {m_awaddr, m_awlen} != aw_q) begin failures++; $display("AW dropped"); end end
    if (w_p)  begin checks++; if (!m_wvalid  || {m_wlast, m_wdata} != w_q) begin failures++; $display("W dropped"); end end
    ar_p <= m_arvalid && !m_arready; ar_q <= {m_araddr, m_arlen};
    aw_p <= m_awvalid && !m_awready; aw_q <= {m_awaddr, m_awlen};
    w_p  <= m_wvalid && !m_wready;   w_q  <= {m_wlast, m_wdata};
  end

  // source: data for src_idx one cycle after src_req
  logic [AW-1:0] src_base;
  always @(posedge clk) src_data <= src_req ? pattern(src_base + src_idx) : 'x;

  // ---------------- read check ----------------
  int exp_idx;
  logic [AW-1:0] rbase;
  always @(posedge clk) if (rst_n && rd_beat_valid) begin
    checks += 2;
    if (int'(rd_beat_idx) != exp_idx) begin failures++; $display("beat index %0d expected %0d", rd_beat_idx, exp_idx); end
    if (rd_beat_data != (mem.exists(rbase / 16 + exp_idx) ? mem[rbase / 16 + exp_idx] : pattern(rbase / 16 + exp_idx))) begin failures++; $display("read data wrong at beat %0d", exp_idx); end
    exp_idx++;
  end

  task automatic do_read(logic [AW-1:0] a, int n);
    rbase = a; exp_idx = 0;
    @(negedge clk); rd_addr = a; rd_beats = CW'(n); rd_start = 1;
    @(negedge clk); rd_start = 0;
    @(posedge clk iff rd_done);
    @(negedge clk);
    checks += 2;
    if (exp_idx != n) begin failures++; $display("read of %0d beats delivered %0d", n, exp_idx); end
    if (rd_busy) failures++;
  endtask

  task automatic do_write(logic [AW-1:0] a, int n, logic [AW-1:0] sb);
    src_base = sb;
    @(negedge clk); wr_addr = a; wr_beats = CW'(n); wr_start = 1;
    @(negedge clk); wr_start = 0;
    @(posedge clk iff wr_done);
    @(negedge clk);
    for (int b = 0; b < n; b++) begin
      checks++;
      if (!mem.exists(a / 16 + b) || mem[a / 16 + b] != pattern(sb + b)) begin failures++; $display("DDR beat %0d wrong", b); end
    end
    checks++;
    if (wr_busy) failures++;
  endtask

  initial begin
    rst_n = 0; rd_start = 0; wr_start = 0; rd_addr = 0; wr_addr = 0; rd_beats = 0; wr_beats = 0;
    src_base = 0; err_next = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    do_read(32'h0000_1000, 1);
    do_read(32'h0000_2000, 16);
    do_read(32'h0000_3000, 17);
    do_read(32'h0001_0000, 53);
    do_write(32'h0002_0000, 1, 32'd100);
    do_write(32'h0002_1000, 16, 32'd200);
    do_write(32'h0002_2000, 33, 32'd300);
    do_write(32'h0002_3000, 50, 32'd400);
    do_read(32'h0002_3000, 50);   // read back what was written
    checks++;
    if (bus_err) failures++;
    err_next = 1;
    do_write(32'h0003_0000, 2, 32'd500);
    @(negedge clk);
    checks++;
    if (!bus_err) begin failures++; $display("bus_err not set by SLVERR"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
