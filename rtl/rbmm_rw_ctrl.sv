// rbmm_rw_ctrl: internal read/write control of the RBMM engine. For one
// RBMM run it walks the loop nest of the selected mode and issues one
// engine invocation per cycle:
//   M1, M4, F1, F2  rows i < L, column groups g < D/NPE
//   M2              rows i < L, groups g < L/NPE of K rows (columns j)
//   M3              heads k < H, rows i < L, groups g < (D/H)/NPE
// With each invocation it gives the indices (k, i, g), first/last-of-row
// flags and, in M2, the attention-mask bit of every PE lane: lane p handles
// column j = g*NPE + p, masked when j >= mask_len (padding mask) or j > i
// (causal mask), i.e. when the loop index passes a limit, as in the paper.
// done pulses DRAIN + 1 cycles after the last invocation, when the engine has
// returned all results. The loop orders are this design's choice.
module rbmm_rw_ctrl
  import cobra_pkg::*;
#(
  parameter int unsigned L     = 512,
  parameter int unsigned D     = 768,
  parameter int unsigned H     = 12,
  parameter int unsigned NPE   = 32,
  parameter int unsigned DRAIN = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  rbmm_mode_e             mode,
  input  mask_mode_e             mask_mode,
  input  logic [$clog2(L+1)-1:0] mask_len,
  output logic                   busy,
  output logic                   done,
  output logic                   iss_valid,
  output logic                   iss_first,
  output logic                   iss_last,
  output logic [$clog2(H)-1:0]   iss_k,
  output logic [$clog2(L)-1:0]   iss_i,
  output logic [15:0]            iss_g,
  output logic [NPE-1:0]         iss_mask
);
  localparam int unsigned DH = D / H;
  localparam int unsigned GD = D / NPE;
  localparam int unsigned GL = L / NPE;
  localparam int unsigned GH = DH / NPE;

  rbmm_mode_e mode_q;
  logic running;
  logic [$clog2(DRAIN+1)-1:0] drain;
  logic [15:0] glast;

  always_comb begin
    unique case (mode_q)
      MODE_M2: glast = 16'(GL - 1);
      MODE_M3: glast = 16'(GH - 1);
      default: glast = 16'(GD - 1);
    endcase
  end

  wire last_g = (iss_g == glast);
  wire last_i = (iss_i == $clog2(L)'(L - 1));
  wire last_k = (mode_q != MODE_M3) || (iss_k == $clog2(H)'(H - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; drain <= '0; done <= 1'b0; mode_q <= MODE_M1;
      iss_k <= '0; iss_i <= '0; iss_g <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        running <= 1'b1; mode_q <= mode;
        iss_k <= '0; iss_i <= '0; iss_g <= '0;
      end else if (running) begin
        if (!last_g) iss_g <= iss_g + 16'd1;
        else begin
          iss_g <= '0;
          if (!last_i) iss_i <= iss_i + 1'b1;
          else begin
            iss_i <= '0;
            if (!last_k) iss_k <= iss_k + 1'b1;
            else begin
              running <= 1'b0;
              drain   <= $clog2(DRAIN+1)'(DRAIN);
            end
          end
        end
      end else if (drain != 0) begin
        drain <= drain - 1'b1;
        if (drain == 1) done <= 1'b1;
      end
    end
  end

  assign busy      = running || (drain != 0);
  assign iss_valid = running;
  assign iss_first = (iss_g == 16'd0);
  assign iss_last  = last_g;

  always_comb begin
    for (int p = 0; p < NPE; p++) begin
      int unsigned j;
      j = int'(iss_g) * NPE + p;
      iss_mask[p] = 1'b0;
      if (mode_q == MODE_M2) begin
        if (mask_mode == MASK_PAD    && j >= int'(mask_len)) iss_mask[p] = 1'b1;
        if (mask_mode == MASK_CAUSAL && j > int'(iss_i))     iss_mask[p] = 1'b1;
      end
    end
  end
endmodule
