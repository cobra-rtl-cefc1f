// rbmm_engine: the quantisation-fused real-binary matrix multiplication
// engine. Each invocation takes one D-bit row datapack of matrix A, NPE
// D-bit column datapacks of matrix B (one per PE), NPE bias values, the
// row's DC INPUT, an attention-mask bit per PE and, for F2, the NPE
// previous outputs; it returns NPE RBVM results. Invocations can be issued
// every cycle (II = 1).
// Pipeline: S0 registers the A datapack and the B datapacks (the paper's
// A/B datapack buffers), then the three PE stages: out_valid follows
// in_valid by 4 cycles. A tag and the first/last-of-row flags
// travel with each invocation. With the result of a row's last invocation
// the engine also returns the DC RETURN summed over all PEs: per-head zero
// counts of the SPS outputs (M2) and the zero count of binary results (F1).
// Structure after the paper; register stage placement and tag side band are
// this design's own.
module rbmm_engine
  import cobra_pkg::*;
#(
  parameter int unsigned D    = 768,
  parameter int unsigned H    = 12,
  parameter int unsigned NPE  = 32,
  parameter int unsigned BO   = 13,
  parameter int unsigned TAGW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_first,
  input  logic                 in_last,
  input  logic [TAGW-1:0]      in_tag,
  input  rbmm_mode_e           mode,
  input  logic [NPE-1:0]       mask,
  input  logic [D-1:0]         a,
  input  logic [D-1:0]         b     [NPE],
  input  logic signed [BO-1:0] thr   [H],
  input  logic signed [BO-1:0] bias  [NPE],
  input  logic [BO-1:0]        dc_in,
  input  logic signed [BO-1:0] prev  [NPE],
  output logic                 out_valid,
  output logic                 out_first,
  output logic                 out_last,
  output logic [TAGW-1:0]      out_tag,
  output logic signed [BO-1:0] out   [NPE],
  output logic [BO-1:0]        dc_head_sum [H],
  output logic [BO-1:0]        dc_full_sum
);
  // S0: datapack registers
  logic                 v0, f0, l0;
  logic [TAGW-1:0]      t0;
  rbmm_mode_e           mode0;
  logic [NPE-1:0]       mask0;
  logic [D-1:0]         a0;
  logic [D-1:0]         b0 [NPE];
  logic signed [BO-1:0] thr0 [H];
  logic signed [BO-1:0] bias0 [NPE];
  logic signed [BO-1:0] prev0 [NPE];
  logic [BO-1:0]        dcin0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0; f0 <= 1'b0; l0 <= 1'b0; t0 <= '0; mode0 <= MODE_M1;
      mask0 <= '0; a0 <= '0; dcin0 <= '0;
      for (int p = 0; p < NPE; p++) begin b0[p] <= '0; bias0[p] <= '0; prev0[p] <= '0; end
      for (int k = 0; k < H; k++) thr0[k] <= '0;
    end else begin
      v0 <= in_valid;
      if (in_valid) begin
        f0 <= in_first; l0 <= in_last; t0 <= in_tag; mode0 <= mode;
        mask0 <= mask; a0 <= a; dcin0 <= dc_in;
        b0 <= b; bias0 <= bias; prev0 <= prev; thr0 <= thr;
      end
    end
  end

  logic [NPE-1:0] pe_v;
  logic [BO-1:0]  pe_dch [NPE][H];
  logic [BO-1:0]  pe_dcf [NPE];

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    rbmm_pe #(.D(D), .H(H), .BO(BO)) u_pe (
      .clk, .rst_n,
      .in_valid (v0),
      .first    (f0),
      .mode     (mode0),
      .mask     (mask0[p]),
      .a        (a0),
      .b        (b0[p]),
      .thr      (thr0),
      .bias     (bias0[p]),
      .dc_in    (dcin0),
      .prev     (prev0[p]),
      .out_valid(pe_v[p]),
      .out      (out[p]),
      .dc_head  (pe_dch[p]),
      .dc_full  (pe_dcf[p])
    );
  end

  // side band through the three PE stages
  logic [2:0]      sv, sf, sl;
  logic [TAGW-1:0] st [3];
  logic [BO-1:0]   dch2 [H];
  logic [BO-1:0]   dch3 [H];

  logic [BO-1:0]   dch_row [H];
  always_comb begin
    for (int k = 0; k < H; k++) begin
      dch_row[k] = '0;
      for (int p = 0; p < NPE; p++) dch_row[k] = dch_row[k] + pe_dch[p][k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sv <= '0; sf <= '0; sl <= '0;
      for (int s = 0; s < 3; s++) st[s] <= '0;
      for (int k = 0; k < H; k++) begin dch2[k] <= '0; dch3[k] <= '0; end
    end else begin
      sv <= {sv[1:0], v0};
      if (v0)    begin sf[0] <= f0;    sl[0] <= l0;    st[0] <= t0;    end
      if (sv[0]) begin sf[1] <= sf[0]; sl[1] <= sl[0]; st[1] <= st[0]; end
      if (sv[1]) begin sf[2] <= sf[1]; sl[2] <= sl[1]; st[2] <= st[1]; end
      // DC HEAD registers hold the complete row count while the row's last
      // invocation sits in stage 1
      if (sv[0] && sl[0]) dch2 <= dch_row;
      if (sv[1]) dch3 <= dch2;
    end
  end

  assign out_valid   = sv[2];
  assign out_first   = sf[2];
  assign out_last    = sl[2];
  assign out_tag     = st[2];
  assign dc_head_sum = dch3;

  always_comb begin
    dc_full_sum = '0;
    for (int p = 0; p < NPE; p++) dc_full_sum = dc_full_sum + pe_dcf[p];
  end

  // every PE runs in lock step with the side band
  always_ff @(posedge clk) begin
    if (rst_n) assert (pe_v == {NPE{sv[2]}}) else $error("PE pipelines out of step");
  end
endmodule
