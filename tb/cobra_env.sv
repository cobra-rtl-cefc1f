// cobra_env: test environment of the accelerator top. It contains
//  - a behavioural AXI4 slave memory standing in for the off-chip DDR
//    (random gaps on R data, random W back-pressure),
//  - a generator that fills the DDR with a random binary encoder layer
//    (input values, weight matrices, thresholds, LayerNorm parameters) and
//    sets the configuration,
//  - an independent reference model of the layer, written directly from the
//    layer's equations with +-1 / 0-1 dot products, and
//  - the comparison of the stored layer output with the reference.
// It starts the layer once, and raises finished when the output has been
// checked; checks/failures count the compared values.
module cobra_env
  import cobra_pkg::*;
#(
  parameter int unsigned L   = 512,
  parameter int unsigned D   = 768,
  parameter int unsigned H   = 12,
  parameter int unsigned R   = 4,
  parameter int unsigned BO  = 13,
  parameter mask_mode_e  MASK_MODE = MASK_CAUSAL,
  parameter int unsigned MASK_LEN  = 0,
  parameter int unsigned SEED = 1
) (
  input  logic               clk,
  output logic               rst_n,
  output logic               start,
  input  logic               done,
  output cobra_cfg_t         cfg,
  output logic signed [15:0] sps_t [H],
  input  logic [31:0]        m_araddr,
  input  logic [7:0]         m_arlen,
  input  logic [2:0]         m_arsize,
  input  logic [1:0]         m_arburst,
  input  logic               m_arvalid,
  output logic               m_arready,
  output logic [127:0]       m_rdata,
  output logic               m_rlast,
  output logic               m_rvalid,
  input  logic               m_rready,
  input  logic [31:0]        m_awaddr,
  input  logic [7:0]         m_awlen,
  input  logic [2:0]         m_awsize,
  input  logic [1:0]         m_awburst,
  input  logic               m_awvalid,
  output logic               m_awready,
  input  logic [127:0]       m_wdata,
  input  logic [15:0]        m_wstrb,
  input  logic               m_wlast,
  input  logic               m_wvalid,
  output logic               m_wready,
  output logic [1:0]         m_bresp,
  output logic               m_bvalid,
  input  logic               m_bready,
  output logic               finished,
  output int                 checks,
  output int                 failures
);
  localparam int unsigned DW  = 128;
  localparam int unsigned DH  = D / H;
  localparam int unsigned WB  = (D + DW - 1) / DW;
  localparam int unsigned NM  = 4 + 2 * R;      // weight matrices
  localparam int unsigned NV  = 8 + R;          // parameter vectors
  function automatic int unsigned al4k(input int unsigned b);
    return (b + 4095) / 4096 * 4096;
  endfunction
  localparam int unsigned X_ADDR = 0;
  localparam int unsigned Y_ADDR = al4k(L * D * 2);
  localparam int unsigned W_ADDR = Y_ADDR + al4k(L * D * 2);
  localparam int unsigned P_ADDR = W_ADDR + al4k(NM * D * WB * 16);
  localparam int unsigned TOTAL  = P_ADDR + al4k(NV * D * 2);

  logic [DW-1:0] mem [TOTAL / 16];

  // ---------------- layer data ----------------
  logic signed [15:0] xin  [L][D];
  logic [D-1:0]       wcol [NM][D];     // column p of matrix m, bit n = row n
  logic signed [15:0] vec  [NV][D];
  logic signed [15:0] yref [L][D];

  // ---------------- reference model ----------------
  function automatic logic signed [15:0] sat16(input longint v);
    if (v > 32767)  return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return 16'(v);
  endfunction

  function automatic longint isqrt(input longint v);
    longint r;
    r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  // LayerNorm with residual: res (in/out), e integer outputs
  task automatic layer_norm(ref logic signed [15:0] res [L][D], ref int e [L][D],
                            input logic signed [15:0] scale, input int gv, input int bv);
    for (int i = 0; i < L; i++) begin
      longint x [D];
      longint sum, sq, mean, msq, var_, sd, inv;
      sum = 0; sq = 0;
      for (int c = 0; c < D; c++) begin
        x[c] = longint'(sat16(longint'(res[i][c]) + ((longint'(e[i][c]) * longint'(scale)) >>> 8)));
        sum += x[c]; sq += x[c] * x[c];
      end
      mean = sum / longint'(D);            // truncates toward zero
      msq  = sq / longint'(D);
      var_ = msq - mean * mean;
      if (var_ < 0) var_ = 0;
      sd   = isqrt(var_);
      if (sd == 0) sd = 1;
      inv  = 65536 / sd;
      for (int c = 0; c < D; c++) begin
        longint n, t;
        n = ((x[c] - mean) * inv) >>> 8;
        t = (n * longint'(vec[gv][c])) >>> 8;
        res[i][c] = sat16(t + longint'(vec[bv][c]));
      end
    end
  endtask

  function automatic int pm_dot(input logic [D-1:0] a, input logic [D-1:0] b, input int n);
    // +-1 x +-1 dot product over n bits
    logic [D-1:0] m;
    m = (n >= D) ? '1 : ((D'(1) << n) - 1'b1);
    return n - 2 * $countones((a ^ b) & m);
  endfunction

  function automatic int zp_dot(input logic [D-1:0] a, input logic [D-1:0] b);
    // (0,1) x (-1,1) dot product: sum over set bits of a of +-1 from b
    return $countones(a & b) - $countones(a & ~b);
  endfunction

  logic signed [15:0] res [L][D];
  int                 eint [L][D];
  logic [D-1:0]       xb [L], qb [L], kb [L], ctx [L], hb [L];
  logic [D-1:0]       vt [D];       // V transposed: vt[p] bit j = V[j][p]
  logic [D-1:0]       s [H][L];     // score rows, lower L bits

  task automatic reference();
    for (int i = 0; i < L; i++) for (int c = 0; c < D; c++) res[i][c] = xin[i][c];
    for (int i = 0; i < L; i++) for (int c = 0; c < D; c++) xb[i][c] = (xin[i][c] >= 0);
    for (int p = 0; p < D; p++) vt[p] = '0;
    for (int i = 0; i < L; i++) begin
      for (int p = 0; p < D; p++) begin
        qb[i][p] = pm_dot(xb[i], wcol[0][p], D) >= int'(vec[0][p]);
        kb[i][p] = pm_dot(xb[i], wcol[1][p], D) >= int'(vec[1][p]);
        vt[p][i] = pm_dot(xb[i], wcol[2][p], D) >= int'(vec[2][p]);
      end
    end
    for (int k = 0; k < H; k++) for (int i = 0; i < L; i++) begin
      s[k][i] = '0;
      for (int j = 0; j < L; j++) begin
        int dot;
        logic masked;
        dot = pm_dot(D'(qb[i] >> (k * DH)), D'(kb[j] >> (k * DH)), DH);
        masked = (MASK_MODE == MASK_PAD && j >= int'(MASK_LEN)) ||
                 (MASK_MODE == MASK_CAUSAL && j > i);
        s[k][i][j] = (dot >= int'(sps_t[k])) && !masked;
      end
    end
    for (int i = 0; i < L; i++) for (int k = 0; k < H; k++) for (int c = 0; c < DH; c++) begin
      int p;
      p = k * DH + c;
      ctx[i][p] = zp_dot(s[k][i], vt[p]) >= int'(vec[3][p]);
    end
    for (int i = 0; i < L; i++) for (int p = 0; p < D; p++) eint[i][p] = pm_dot(ctx[i], wcol[3][p], D);
    layer_norm(res, eint, cfg.scale1, 4 + R, 5 + R);
    for (int i = 0; i < L; i++) for (int c = 0; c < D; c++) xb[i][c] = (res[i][c] >= 0);
    for (int i = 0; i < L; i++) for (int p = 0; p < D; p++) eint[i][p] = 0;
    for (int r = 0; r < R; r++) begin
      for (int i = 0; i < L; i++) for (int q = 0; q < D; q++)
        hb[i][q] = pm_dot(xb[i], wcol[4 + 2*r][q], D) >= int'(vec[4 + r][q]);
      for (int i = 0; i < L; i++) for (int p = 0; p < D; p++)
        eint[i][p] += zp_dot(hb[i], wcol[5 + 2*r][p]);
    end
    layer_norm(res, eint, cfg.scale2, 6 + R, 7 + R);
    for (int i = 0; i < L; i++) for (int c = 0; c < D; c++) yref[i][c] = res[i][c];
  endtask

  // ---------------- data generation ----------------
  task automatic generate_layer();
    void'($urandom(SEED));
    for (int a = 0; a < int'(TOTAL / 16); a++) mem[a] = '0;
    for (int i = 0; i < L; i++) for (int c = 0; c < D; c++) xin[i][c] = 16'(int'($urandom_range(1023)) - 512);
    for (int m = 0; m < int'(NM); m++) for (int p = 0; p < D; p++)
      for (int n = 0; n < D; n += 32) wcol[m][p][n +: 32] = $urandom;
    for (int p = 0; p < D; p++) begin
      for (int v = 0; v < 3; v++) vec[v][p] = 16'(int'($urandom_range(24)) - 12);
      vec[3][p] = 16'(int'($urandom_range(8)) - 4);
      for (int r = 0; r < R; r++) vec[4 + r][p] = 16'($urandom_range(12));
      vec[4 + R][p] = 16'(192 + $urandom_range(128));
      vec[5 + R][p] = 16'(int'($urandom_range(128)) - 64);
      vec[6 + R][p] = 16'(192 + $urandom_range(128));
      vec[7 + R][p] = 16'(int'($urandom_range(128)) - 64);
    end
    for (int k = 0; k < H; k++) sps_t[k] = 16'($urandom_range(6));
    // DDR image
    for (int i = 0; i < L; i++) for (int c = 0; c < D; c++) begin
      int e;
      e = i * D + c;
      mem[X_ADDR / 16 + e / 8][(e % 8) * 16 +: 16] = xin[i][c];
    end
    for (int m = 0; m < int'(NM); m++) for (int p = 0; p < D; p++) for (int q = 0; q < int'(WB); q++) begin
      logic [WB*DW-1:0] ext;
      ext = (WB*DW)'(wcol[m][p]);
      mem[W_ADDR / 16 + (m * D + p) * WB + q] = ext[q*DW +: DW];
    end
    for (int v = 0; v < int'(NV); v++) for (int c = 0; c < D; c++)
      mem[(P_ADDR + v * D * 2) / 16 + c / 8][(c % 8) * 16 +: 16] = vec[v][c];
  endtask

  // ---------------- AXI slave ----------------
  logic        r_act;
  int unsigned r_beat, r_len;
  logic [31:0] r_base;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r_act <= 1'b0; m_rvalid <= 1'b0;
    end else begin
      if (!r_act) begin
        if (m_arvalid && m_arready) begin
          r_act <= 1'b1; r_beat <= 0; r_len <= int'(m_arlen) + 1; r_base <= m_araddr;
          assert (m_arburst == 2'b01 && m_arsize == 3'd4) else $error("unexpected AR burst type/size");
          assert ((m_araddr >> 12) == ((m_araddr + (int'(m_arlen) + 1) * 16 - 1) >> 12))
            else $error("read burst crosses 4 KiB");
        end
      end
      if (m_rvalid && m_rready) begin
        m_rvalid <= 1'b0;
        if (m_rlast) r_act <= 1'b0;
      end else if (r_act && !m_rvalid && ($urandom_range(7) != 0)) begin
        m_rvalid <= 1'b1;
        m_rdata  <= mem[r_base / 16 + r_beat];
        m_rlast  <= (r_beat == r_len - 1);
        r_beat   <= r_beat + 1;
      end
    end
  end
  assign m_arready = rst_n && !r_act;

  logic        w_act;
  int unsigned w_beat;
  logic [31:0] w_base;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_act <= 1'b0; m_bvalid <= 1'b0; m_wready <= 1'b0;
    end else begin
      if (!w_act && !m_bvalid && m_awvalid && m_awready) begin
        w_act <= 1'b1; w_beat <= 0; w_base <= m_awaddr;
      end
      m_wready <= w_act && ($urandom_range(3) != 0);
      if (m_wvalid && m_wready) begin
        mem[w_base / 16 + w_beat] <= m_wdata;
        w_beat <= w_beat + 1;
        if (m_wlast) begin w_act <= 1'b0; m_bvalid <= 1'b1; m_wready <= 1'b0; end
      end
      if (m_bvalid && m_bready) m_bvalid <= 1'b0;
    end
  end
  assign m_awready = rst_n && !w_act && !m_bvalid;
  assign m_bresp   = 2'b00;

  // ---------------- sequence ----------------
  initial begin
    rst_n = 1'b0; start = 1'b0; finished = 1'b0; checks = 0; failures = 0;
    cfg = '{x_addr: X_ADDR, y_addr: Y_ADDR, w_addr: W_ADDR, p_addr: P_ADDR,
            mask_mode: MASK_MODE, mask_len: 16'(MASK_LEN), scale1: 16'sd24, scale2: 16'sd12};
    generate_layer();
    reference();
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    start = 1'b1;
    @(posedge clk);
    start = 1'b0;
    @(posedge clk iff done);
    repeat (2) @(posedge clk);
    for (int i = 0; i < L; i++) for (int c = 0; c < D; c++) begin
      int e;
      logic signed [15:0] got;
      e = i * D + c;
      got = mem[Y_ADDR / 16 + e / 8][(e % 8) * 16 +: 16];
      checks++;
      if (got !== yref[i][c]) begin
        failures++;
        if (failures <= 8) $display("output mismatch row %0d col %0d: got %0d expected %0d", i, c, got, yref[i][c]);
      end
    end
    finished = 1'b1;
  end
endmodule
