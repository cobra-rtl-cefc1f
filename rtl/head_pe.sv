// head_pe: one HEAD PE of an RBMM PE. It computes the real-binary dot
// product of two DH-bit head datapacks ("-1" coded as 0):
//   XNOR/AND unit -> popcount -> (<<1) -> minus threshold/data width.
// The XNOR/AND unit uses the AND gate alone for the (0,1) x (-1,1) modes
// M3 and F2 (use_and=1) and the XNOR, formed as (a&b)|~(a|b), otherwise.
// The result goes out on the ACC PATH as a signed BO-bit value. The Shifted
// Polarized Softmax takes its sign (zero counts as 1), forces it to 0 when
// the attention mask is set, and drives the CONCAT PATH bit. In M2
// (count_dc=1) the DC HEAD register counts the zero SPS bits of a row:
// it restarts at the invocation flagged first.
// Timing: one register stage; acc/sps/valid appear one cycle after in_valid.
// The paper gives the structure; the signed BO-bit result width (the paper
// states log2(d_h)+1 bits) and the restart-on-first DC rule are choices of
// this design.
module head_pe #(
  parameter int unsigned DH = 64,
  parameter int unsigned BO = 13
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 first,     // first invocation of a row
  input  logic                 use_and,   // (0,1) A operand
  input  logic                 count_dc,  // M2: count zero SPS outputs
  input  logic                 mask,      // attention mask for this element
  input  logic signed [BO-1:0] thr,       // threshold / data width
  input  logic [DH-1:0]        a,
  input  logic [DH-1:0]        b,
  output logic signed [BO-1:0] acc,
  output logic                 sps,
  output logic [BO-1:0]        dc_head
);
  localparam int unsigned CW = $clog2(DH+1);

  logic [DH-1:0] and_v, or_v, xnor_v, sel_v;
  logic [CW-1:0] pop;
  logic signed [BO-1:0] diff;
  logic sps_c;

  assign and_v  = a & b;
  assign or_v   = a | b;
  assign xnor_v = and_v | ~or_v;
  assign sel_v  = use_and ? and_v : xnor_v;

  popcount_unit #(.W(DH)) u_pop (.bits(sel_v), .count(pop));

  assign diff  = signed'(BO'({pop, 1'b0})) - thr;
  assign sps_c = ~diff[BO-1] & ~mask;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      sps     <= 1'b0;
      dc_head <= '0;
    end else if (in_valid) begin
      acc <= diff;
      sps <= sps_c;
      if (first) dc_head <= BO'({count_dc & ~sps_c});
      else       dc_head <= dc_head + BO'({count_dc & ~sps_c});
    end
  end
endmodule
