// popcount_unit: population count of a W-bit vector built from 6:3
// compressors, as in the paper's HEAD PE popcount unit. The vector is cut
// into 36-bit groups (the last one zero padded). In each group six
// compressors count the ones of six 6-bit slices; a second row of three
// compressors then counts, across the six 3-bit results, the ones of bit 2,
// bit 1 and bit 0 separately; a shift-and-add (<<2, <<1, <<0) gives the
// 36-bit count. The group counts are added. Combinational; the caller
// registers the result.
module popcount_unit #(
  parameter int unsigned W = 64
) (
  input  logic [W-1:0]           bits,
  output logic [$clog2(W+1)-1:0] count
);
  localparam int unsigned NG = (W + 35) / 36;  // 36-bit groups
  localparam int unsigned CW = $clog2(W+1);

  logic [NG*36-1:0] padded;
  assign padded = (NG*36)'(bits);

  logic [5:0] gcount [NG];

  for (genvar g = 0; g < NG; g++) begin : g_grp
    logic [2:0] c1 [6];
    logic [5:0] plane [3];
    logic [2:0] c2 [3];
    for (genvar s = 0; s < 6; s++) begin : g_first
      compressor63 u_c (.in(padded[g*36 + s*6 +: 6]), .cnt(c1[s]));
    end
    for (genvar p = 0; p < 3; p++) begin : g_plane
      assign plane[p] = {c1[5][p], c1[4][p], c1[3][p], c1[2][p], c1[1][p], c1[0][p]};
      compressor63 u_c (.in(plane[p]), .cnt(c2[p]));
    end
    assign gcount[g] = {1'b0, c2[2], 2'b00} + {2'b00, c2[1], 1'b0} + {3'b000, c2[0]};
  end

  always_comb begin
    count = '0;
    for (int g = 0; g < NG; g++) count = count + CW'(gcount[g]);
  end
endmodule
