// cobra_ctrl: the COBRA control unit. It runs one binary transformer
// encoder layer as a fixed sequence of operations and hands each one, as a
// descriptor with a start pulse, to the data path; it moves on when the
// data path reports op_done. The sequence (weight/vector indices refer to
// the DDR layout described in the top module):
//   load input, binarise input,
//   for Q, K, V: load weights, load bias, RBMM M1,
//   RBMM M2 (scores with SPS), load context bias, RBMM M3, load W_O,
//   RBMM M4, load gamma/beta, LayerNorm,
//   for r < R: load Y_r, load F1 bias r, RBMM F1, load Z_r, RBMM F2(r),
//   load gamma/beta, LayerNorm, store output.
// The chunked FFN (R pairs of F1/F2, each d x d, accumulated into one
// output buffer) is the paper's; the order of loads is this design's own.
// done pulses one cycle after the last op_done.
module cobra_ctrl
  import cobra_pkg::*;
#(
  parameter int unsigned R = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  output logic     busy,
  output logic     done,
  output logic     op_start,
  output op_desc_t op,
  input  logic     op_done,
  output logic [7:0] step
);
  localparam int unsigned NSTEPS = 19 + 5 * R + 4;

  function automatic op_desc_t step_desc(input int unsigned s);
    op_desc_t d;
    int unsigned t, rr;
    d = '{op: OP_LOADX, mat: '0, vec: '0, slot: VS_BIAS, mode: MODE_M1, dst: DST_Q, r: '0, ln: 1'b0};
    unique case (s)
      0:  d.op = OP_LOADX;
      1:  d.op = OP_BINX;
      2:  begin d.op = OP_LOADW; d.mat = 5'd0; end
      3:  begin d.op = OP_LOADV; d.vec = 5'd0; end
      4:  begin d.op = OP_RUN; d.mode = MODE_M1; d.dst = DST_Q; end
      5:  begin d.op = OP_LOADW; d.mat = 5'd1; end
      6:  begin d.op = OP_LOADV; d.vec = 5'd1; end
      7:  begin d.op = OP_RUN; d.mode = MODE_M1; d.dst = DST_K; end
      8:  begin d.op = OP_LOADW; d.mat = 5'd2; end
      9:  begin d.op = OP_LOADV; d.vec = 5'd2; end
      10: begin d.op = OP_RUN; d.mode = MODE_M1; d.dst = DST_V; end
      11: begin d.op = OP_RUN; d.mode = MODE_M2; d.dst = DST_S; end
      12: begin d.op = OP_LOADV; d.vec = 5'd3; end
      13: begin d.op = OP_RUN; d.mode = MODE_M3; d.dst = DST_CTX; end
      14: begin d.op = OP_LOADW; d.mat = 5'd3; end
      15: begin d.op = OP_RUN; d.mode = MODE_M4; d.dst = DST_E; end
      16: begin d.op = OP_LOADV; d.vec = 5'(4 + R); d.slot = VS_GAMMA; end
      17: begin d.op = OP_LOADV; d.vec = 5'(5 + R); d.slot = VS_BETA; end
      18: begin d.op = OP_LN; d.ln = 1'b0; end
      default: begin
        t = s - 19;
        if (t < 5 * R) begin
          rr = t / 5;
          d.r = 4'(rr);
          unique case (t % 5)
            0: begin d.op = OP_LOADW; d.mat = 5'(4 + 2 * rr); end
            1: begin d.op = OP_LOADV; d.vec = 5'(4 + rr); end
            2: begin d.op = OP_RUN; d.mode = MODE_F1; d.dst = DST_H; end
            3: begin d.op = OP_LOADW; d.mat = 5'(5 + 2 * rr); end
            default: begin d.op = OP_RUN; d.mode = MODE_F2; d.dst = DST_E; end
          endcase
        end else begin
          unique case (t - 5 * R)
            0: begin d.op = OP_LOADV; d.vec = 5'(6 + R); d.slot = VS_GAMMA; end
            1: begin d.op = OP_LOADV; d.vec = 5'(7 + R); d.slot = VS_BETA; end
            2: begin d.op = OP_LN; d.ln = 1'b1; end
            default: d.op = OP_STORE;
          endcase
        end
      end
    endcase
    return d;
  endfunction

  typedef enum logic [1:0] {C_IDLE, C_ISSUE, C_WAIT} cstate_e;
  cstate_e cs;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs <= C_IDLE; step <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (cs)
        C_IDLE:  if (start) begin step <= '0; cs <= C_ISSUE; end
        C_ISSUE: cs <= C_WAIT;
        C_WAIT:  if (op_done) begin
          if (step == 8'(NSTEPS - 1)) begin cs <= C_IDLE; done <= 1'b1; end
          else begin step <= step + 1'b1; cs <= C_ISSUE; end
        end
        default: cs <= C_IDLE;
      endcase
    end
  end

  assign op       = step_desc(int'(step));
  assign op_start = (cs == C_ISSUE);
  assign busy     = (cs != C_IDLE);
endmodule
