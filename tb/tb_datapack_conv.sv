// tb_datapack_conv: data packing conversion with l = 16, d = 32, h = 2,
// 8 PEs. Random logical matrices (Q, K, V, per-head scores, context,
// hidden, integer results, input values and DC sums) are sent through the
// unit as results in engine order; the write ports are applied to memory
// models here, and the memories must then hold each matrix in the layout
// its consumer expects: Q/CTX/H/X rows in their row-buffer regions, K row j
// in B bank j mod NPE, V transposed (column c as an L-bit word in bank
// c mod NPE), score row i of head k in bank k, integers at i*D/NPE + g and
// the DC values at their row.
module tb_datapack_conv;
  import cobra_pkg::*;
  localparam int L = 16, D = 32, H = 2, NPE = 8, BO = 13, DH = D / H;
  localparam int NG = D / NPE, GL = L / NPE, BD = 2 * NG + GL;
  localparam int BA = $clog2(BD), RA = $clog2(4 * L), EA = $clog2(L * NG), IA = $clog2(L);

  logic r_valid, r_last, x_valid;
  rbmm_dst_e r_dst;
  rbmm_tag_t r_tag;
  logic signed [BO-1:0] r_out [NPE];
  logic [BO-1:0] r_dch [H];
  logic [BO-1:0] r_dcf;
  logic [IA-1:0] x_row;
  logic [15:0] x_g;
  logic [NPE-1:0][15:0] x_val;
  logic row_we, s_we, e_we, dch_we, dcf_we;
  logic [RA-1:0] row_addr;
  logic [D-1:0] row_wdata, row_wmask, b_wmask;
  logic [NPE-1:0] b_we;
  logic [BA-1:0] b_addr;
  logic [D-1:0] b_wdata [NPE];
  logic [IA-1:0] s_addr, dc_addr;
  logic [L-1:0] s_wdata [H];
  logic [L-1:0] s_wmask;
  logic [EA-1:0] e_addr;
  logic [NPE-1:0][BO-1:0] e_wdata;
  logic [H-1:0][BO-1:0] dch_wdata;
  logic [BO-1:0] dcf_wdata;
  int checks = 0, failures = 0;

  datapack_conv #(.L(L), .D(D), .H(H), .NPE(NPE), .BO(BO)) dut (.*);

  // memory models written through the unit's ports
  logic [D-1:0] rowm [4*L];
  logic [D-1:0] bm [NPE][BD];
  logic [L-1:0] sm [H][L];
  logic [NPE-1:0][BO-1:0] em [L*NG];
  logic [H-1:0][BO-1:0] dchm [L];
  logic [BO-1:0] dcfm [L];

  // logical matrices
  bit q [L][D], k_ [L][D], v [L][D], ctx [L][D], hid [L][D], xs [L][D];
  bit s [H][L][L];
  int e [L][D];
  int dchv [L][H], dcfv [L];

  task automatic apply();
    #1;
    if (row_we) rowm[row_addr] = (rowm[row_addr] & ~row_wmask) | (row_wdata & row_wmask);
    for (int p = 0; p < NPE; p++)
      if (b_we[p]) bm[p][b_addr] = (bm[p][b_addr] & ~b_wmask) | (b_wdata[p] & b_wmask);
    if (s_we) for (int kk = 0; kk < H; kk++) sm[kk][s_addr] = (sm[kk][s_addr] & ~s_wmask) | (s_wdata[kk] & s_wmask);
    if (e_we) em[e_addr] = e_wdata;
    if (dch_we) dchm[dc_addr] = dch_wdata;
    if (dcf_we) dcfm[dc_addr] = dcf_wdata;
    #1;
    r_valid = 0; x_valid = 0; r_last = 0;
  endtask

  task automatic send(rbmm_dst_e dst, int kk, int i, int g, bit last);
    r_valid = 1; r_dst = dst; r_last = last;
    r_tag = '{k: 8'(kk), i: 12'(i), g: 12'(g)};
    for (int p = 0; p < NPE; p++) begin
      int c;
      c = g * NPE + p;
      case (dst)
        DST_Q:   r_out[p] = BO'(q[i][c]);
        DST_K:   r_out[p] = BO'(k_[i][c]);
        DST_V:   r_out[p] = BO'(v[i][c]);
        DST_H:   r_out[p] = BO'(hid[i][c]);
        DST_E:   r_out[p] = BO'(e[i][c]);
        DST_CTX: r_out[p] = BO'(ctx[i][kk * DH + c]);
        DST_S:   begin r_out[p] = '0; for (int h = 0; h < H; h++) r_out[p][h] = s[h][i][c]; end
        default: r_out[p] = '0;
      endcase
    end
    for (int h = 0; h < H; h++) r_dch[h] = BO'(dchv[i][h]);
    r_dcf = BO'(dcfv[i]);
    apply();
  endtask

  initial begin
    r_valid = 0; r_last = 0; x_valid = 0; r_dst = DST_Q; r_tag = '0; r_dcf = 0; x_row = 0; x_g = 0; x_val = '0;
    for (int p = 0; p < NPE; p++) r_out[p] = 0;
    for (int h = 0; h < H; h++) r_dch[h] = 0;
    for (int a = 0; a < 4 * L; a++) rowm[a] = '0;
    for (int p = 0; p < NPE; p++) for (int a = 0; a < BD; a++) bm[p][a] = '0;
    for (int h = 0; h < H; h++) for (int a = 0; a < L; a++) sm[h][a] = '0;
    for (int i = 0; i < L; i++) begin
      dcfv[i] = $urandom_range(D);
      for (int h = 0; h < H; h++) dchv[i][h] = $urandom_range(L);
      for (int c = 0; c < D; c++) begin
        q[i][c] = $urandom; k_[i][c] = $urandom; v[i][c] = $urandom; ctx[i][c] = $urandom;
        hid[i][c] = $urandom; e[i][c] = int'($urandom_range(4000)) - 2000;
      end
      for (int h = 0; h < H; h++) for (int j = 0; j < L; j++) s[h][i][j] = $urandom;
    end
    #5;
    // results in engine order
    for (int i = 0; i < L; i++) for (int g = 0; g < NG; g++) send(DST_Q, 0, i, g, g == NG - 1);
    for (int i = 0; i < L; i++) for (int g = 0; g < NG; g++) send(DST_K, 0, i, g, g == NG - 1);
    for (int i = 0; i < L; i++) for (int g = 0; g < NG; g++) send(DST_V, 0, i, g, g == NG - 1);
    for (int i = 0; i < L; i++) for (int g = 0; g < GL; g++) send(DST_S, 0, i, g, g == GL - 1);
    for (int kk = 0; kk < H; kk++) for (int i = 0; i < L; i++) for (int g = 0; g < DH / NPE; g++)
      send(DST_CTX, kk, i, g, g == DH / NPE - 1);
    for (int i = 0; i < L; i++) for (int g = 0; g < NG; g++) send(DST_H, 0, i, g, g == NG - 1);
    for (int i = 0; i < L; i++) for (int g = 0; g < NG; g++) send(DST_E, 0, i, g, g == NG - 1);
    // signs of 16-bit values into the X region
    for (int i = 0; i < L; i++) for (int g = 0; g < NG; g++) begin
      x_valid = 1; x_row = IA'(i); x_g = 16'(g);
      for (int p = 0; p < NPE; p++) begin
        x_val[p] = 16'($urandom);
        xs[i][g * NPE + p] = !x_val[p][15];
      end
      apply();
    end

    for (int i = 0; i < L; i++) begin
      for (int c = 0; c < D; c++) begin
        checks += 6;
        if (rowm[int'(AREG_Q) * L + i][c]   !== q[i][c])   failures++;
        if (rowm[int'(AREG_CTX) * L + i][c] !== ctx[i][c]) failures++;
        if (rowm[int'(AREG_H) * L + i][c]   !== hid[i][c]) failures++;
        if (rowm[int'(AREG_X) * L + i][c]   !== xs[i][c])  failures++;
        if (bm[i % NPE][NG + i / NPE][c]    !== k_[i][c])  failures++;
        if (bm[c % NPE][NG + GL + c / NPE][i] !== v[i][c]) failures++;
        checks++;
        if (int'(signed'(em[i * NG + c / NPE][c % NPE])) != e[i][c]) failures++;
      end
      for (int h = 0; h < H; h++) begin
        for (int j = 0; j < L; j++) begin checks++; if (sm[h][i][j] !== s[h][i][j]) failures++; end
        checks++;
        if (int'(dchm[i][h]) != dchv[i][h]) failures++;
      end
      checks++;
      if (int'(dcfm[i]) != dcfv[i]) failures++;
    end
    // the W region of the B buffer is never written by results
    for (int p = 0; p < NPE; p++) for (int a = 0; a < NG; a++) begin
      checks++; if (bm[p][a] !== '0) failures++;
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
