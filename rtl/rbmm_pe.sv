// rbmm_pe: one RBMM processing element. It holds H HEAD PEs, one per
// DH-bit slice of the D-bit row and column datapacks, and three pipeline
// stages (II = 1):
//  S1  HEAD PEs: per-head 2*popcount - thr, SPS bit, DC HEAD count.
//  S2  ACC PATH: sum of the H head results plus DC INPUT (M3, F2);
//      CONCAT PATH: the H SPS bits side by side.
//  S3  quantisation ">= bias" and mode multiplexer:
//        M1, M3, F1  binary result 0/1 (sum >= bias)
//        M4          integer sum
//        F2          integer sum + previous output (FFN accumulation)
//        M2          H-bit concatenated SPS value
//      DC FULL counts the zero binary results of a row in F1.
// out/dc_full are valid three cycles after in_valid (out_valid). dc_head is
// the S1 register of every HEAD PE. The stage split is this design's own;
// the data path follows the paper's PE figure and mode descriptions.
module rbmm_pe
  import cobra_pkg::*;
#(
  parameter int unsigned D  = 768,
  parameter int unsigned H  = 12,
  parameter int unsigned BO = 13
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 first,
  input  rbmm_mode_e           mode,
  input  logic                 mask,
  input  logic [D-1:0]         a,
  input  logic [D-1:0]         b,
  input  logic signed [BO-1:0] thr [H],
  input  logic signed [BO-1:0] bias,
  input  logic [BO-1:0]        dc_in,
  input  logic signed [BO-1:0] prev,
  output logic                 out_valid,
  output logic signed [BO-1:0] out,
  output logic [BO-1:0]        dc_head [H],
  output logic [BO-1:0]        dc_full
);
  localparam int unsigned DH = D / H;

  logic signed [BO-1:0] hacc [H];
  logic [H-1:0]         hsps;

  for (genvar k = 0; k < H; k++) begin : g_head
    head_pe #(.DH(DH), .BO(BO)) u_head (
      .clk, .rst_n, .in_valid, .first,
      .use_and (mode_unsigned_a(mode)),
      .count_dc(mode == MODE_M2),
      .mask,
      .thr     (thr[k]),
      .a       (a[k*DH +: DH]),
      .b       (b[k*DH +: DH]),
      .acc     (hacc[k]),
      .sps     (hsps[k]),
      .dc_head (dc_head[k])
    );
  end

  // side-band pipeline
  logic                 v1, v2, f1, f2;
  rbmm_mode_e           m1, m2;
  logic signed [BO-1:0] bias1, bias2, prev1, prev2;
  logic [BO-1:0]        dcin1;
  logic signed [BO-1:0] sum2;
  logic [H-1:0]         cat2;

  logic signed [BO-1:0] hsum;
  always_comb begin
    hsum = mode_unsigned_a(m1) ? signed'(dcin1) : '0;
    for (int k = 0; k < H; k++) hsum = hsum + hacc[k];
  end

  logic bin3;
  assign bin3 = (sum2 >= bias2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
      f1 <= 1'b0; f2 <= 1'b0;
      m1 <= MODE_M1; m2 <= MODE_M1;
      bias1 <= '0; bias2 <= '0; prev1 <= '0; prev2 <= '0; dcin1 <= '0;
      sum2 <= '0; cat2 <= '0; out <= '0; dc_full <= '0;
    end else begin
      v1 <= in_valid; v2 <= v1; out_valid <= v2;
      if (in_valid) begin
        f1 <= first; m1 <= mode; bias1 <= bias; prev1 <= prev; dcin1 <= dc_in;
      end
      if (v1) begin
        f2 <= f1; m2 <= m1; bias2 <= bias1; prev2 <= prev1;
        sum2 <= hsum; cat2 <= hsps;
      end
      if (v2) begin
        unique case (m2)
          MODE_M4: out <= sum2;
          MODE_F2: out <= sum2 + prev2;
          MODE_M2: out <= signed'(BO'(cat2));
          default: out <= signed'(BO'(bin3));
        endcase
        if (f2) dc_full <= BO'({(m2 == MODE_F1) & ~bin3});
        else    dc_full <= dc_full + BO'({(m2 == MODE_F1) & ~bin3});
      end
    end
  end
endmodule
