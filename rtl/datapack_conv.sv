// datapack_conv: the data packing conversion unit. It turns results into
// the binary datapacks that later RBMM runs read, by computing for each
// result the buffer, address and bit write mask:
//  - binary results of M1 (Q), M3 (context), F1 (hidden) and the signs of
//    LayerNorm / input values (x >= 0 -> 1) go as NPE bits into a D-bit row
//    of the A-operand row buffer, at column g*NPE (M3: k*D/H + g*NPE);
//  - binary K results of M1 fill K rows in the NPE-banked B buffer
//    (row j in bank j mod NPE), ready to be read NPE rows at a time in M2;
//  - binary V results of M1 are transposed: column c of V becomes an L-bit
//    datapack in bank c mod NPE, bit i written per row (the V transpose);
//  - the H-bit SPS values of M2 give one bit per head, written into the
//    score row i of each head's bank at column g*NPE;
//  - integer results (M4, F2) go unchanged to the integer output buffer;
//  - with the last result of a row the DC HEAD (M2) and DC FULL (F1) sums
//    are written to the don't-care buffers.
// Purely combinational; the write ports are registered in the RAMs.
// The paper states that this unit packs intermediate matrices into
// datapacks and transposes V; the buffer organisation is this design's own.
module datapack_conv
  import cobra_pkg::*;
#(
  parameter int unsigned L   = 512,
  parameter int unsigned D   = 768,
  parameter int unsigned H   = 12,
  parameter int unsigned NPE = 32,
  parameter int unsigned BO  = 13,
  localparam int unsigned NG  = D / NPE,
  localparam int unsigned GL  = L / NPE,
  localparam int unsigned BD  = 2 * NG + GL,          // B buffer depth per bank
  localparam int unsigned BA  = $clog2(BD),
  localparam int unsigned RA  = $clog2(4 * L),
  localparam int unsigned EA  = $clog2(L * NG),
  localparam int unsigned IA  = $clog2(L)
) (
  // engine results
  input  logic                    r_valid,
  input  logic                    r_last,
  input  rbmm_dst_e               r_dst,
  input  rbmm_tag_t               r_tag,
  input  logic signed [BO-1:0]    r_out [NPE],
  input  logic [BO-1:0]           r_dch [H],
  input  logic [BO-1:0]           r_dcf,
  // values to binarise (LayerNorm output or layer input)
  input  logic                    x_valid,
  input  logic [IA-1:0]           x_row,
  input  logic [15:0]             x_g,
  input  logic [NPE-1:0][15:0]    x_val,
  // A-operand row buffer
  output logic                    row_we,
  output logic [RA-1:0]           row_addr,
  output logic [D-1:0]            row_wdata,
  output logic [D-1:0]            row_wmask,
  // banked B buffer
  output logic [NPE-1:0]          b_we,
  output logic [BA-1:0]           b_addr,
  output logic [D-1:0]            b_wdata [NPE],
  output logic [D-1:0]            b_wmask,
  // score banks
  output logic                    s_we,
  output logic [IA-1:0]           s_addr,
  output logic [L-1:0]            s_wdata [H],
  output logic [L-1:0]            s_wmask,
  // integer output buffer
  output logic                    e_we,
  output logic [EA-1:0]           e_addr,
  output logic [NPE-1:0][BO-1:0]  e_wdata,
  // don't-care buffers
  output logic                    dch_we,
  output logic                    dcf_we,
  output logic [IA-1:0]           dc_addr,
  output logic [H-1:0][BO-1:0]    dch_wdata,
  output logic [BO-1:0]           dcf_wdata
);
  localparam int unsigned DH = D / H;

  logic [NPE-1:0] bits, hb, sb;
  int unsigned    col0;

  always_comb begin
    for (int p = 0; p < NPE; p++) bits[p] = r_out[p][0];
    hb = '0;
    for (int p = 0; p < NPE; p++) sb[p] = ~x_val[p][15];

    row_we = 1'b0; row_addr = '0; row_wdata = '0; row_wmask = '0;
    b_we = '0; b_addr = '0; b_wmask = '0;
    for (int p = 0; p < NPE; p++) b_wdata[p] = '0;
    s_we = 1'b0; s_addr = '0; s_wmask = '0;
    for (int k = 0; k < H; k++) s_wdata[k] = '0;
    e_we = 1'b0; e_addr = '0; e_wdata = '0;
    dch_we = 1'b0; dcf_we = 1'b0; dc_addr = '0; dch_wdata = '0; dcf_wdata = '0;
    col0 = int'(r_tag.g) * NPE;

    if (r_valid) begin
      unique case (r_dst)
        DST_Q, DST_CTX, DST_H: begin
          if (r_dst == DST_CTX) col0 = int'(r_tag.k) * DH + int'(r_tag.g) * NPE;
          row_we    = 1'b1;
          row_addr  = RA'((r_dst == DST_Q ? int'(AREG_Q) : r_dst == DST_CTX ? int'(AREG_CTX) : int'(AREG_H)) * L)
                      + RA'(r_tag.i);
          row_wdata = D'(bits) << col0;
          row_wmask = D'({NPE{1'b1}}) << col0;
        end
        DST_K: begin
          b_we[int'(r_tag.i) % NPE] = 1'b1;
          b_addr  = BA'(NG + int'(r_tag.i) / NPE);
          for (int p = 0; p < NPE; p++) b_wdata[p] = D'(bits) << col0;
          b_wmask = D'({NPE{1'b1}}) << col0;
        end
        DST_V: begin
          b_we    = '1;
          b_addr  = BA'(NG + GL + int'(r_tag.g));
          for (int p = 0; p < NPE; p++) b_wdata[p] = D'(bits[p]) << r_tag.i;
          b_wmask = D'(1) << r_tag.i;
        end
        DST_S: begin
          s_we    = 1'b1;
          s_addr  = IA'(r_tag.i);
          for (int k = 0; k < H; k++) begin
            for (int p = 0; p < NPE; p++) hb[p] = r_out[p][k];
            s_wdata[k] = L'(hb) << col0;
          end
          s_wmask = L'({NPE{1'b1}}) << col0;
          if (r_last) begin
            dch_we  = 1'b1;
            dc_addr = IA'(r_tag.i);
            for (int k = 0; k < H; k++) dch_wdata[k] = r_dch[k];
          end
        end
        DST_E: begin
          e_we   = 1'b1;
          e_addr = EA'(int'(r_tag.i) * NG + int'(r_tag.g));
          for (int p = 0; p < NPE; p++) e_wdata[p] = r_out[p];
        end
        default: ;
      endcase
      if (r_dst == DST_H) begin
        if (r_last) begin
          dcf_we    = 1'b1;
          dc_addr   = IA'(r_tag.i);
          dcf_wdata = r_dcf;
        end
      end
    end else if (x_valid) begin
      row_we    = 1'b1;
      row_addr  = RA'(int'(AREG_X) * L) + RA'(x_row);
      row_wdata = D'(sb) << (int'(x_g) * NPE);
      row_wmask = D'({NPE{1'b1}}) << (int'(x_g) * NPE);
    end
  end
endmodule
