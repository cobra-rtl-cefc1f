// layernorm_unit: residual addition and LayerNorm in 16-bit fixed point
// (Q8.8), one row of D values at a time, NPE lanes per cycle.
// For every row i:
//  1. reads the residual RES and the integer RBMM output E of each NPE-wide
//     group, forms x = sat16(res + ((e * scale) >>> 8)) (scale is the Q8.8
//     scaling factor of the binary matrix product), keeps x in the local
//     row buffer and accumulates sum(x) and sum(x^2);
//  2. mean = sum/D (toward zero), var = max(0, sum(x^2)/D - mean^2),
//     std = max(1, floor(sqrt(var))), inv = floor(2^16/std), with one
//     sequential divider and a sequential square root;
//  3. for every group, y = sat16(((((x-mean)*inv) >>> 8) * gamma >>> 8) + beta)
//     with per-column gamma/beta, written back to RES and handed out on
//     out_* so that its signs can be packed into the next binary datapack.
// Memory ports have a one-cycle read latency. Roughly 2*D/NPE + 3*48 + 24
// cycles per row. The paper states only that the unit uses 16-bit fixed
// point scaling factors and values and has a local buffer; the number
// formats, the order of operations and the rounding are this design's own.
module layernorm_unit #(
  parameter int unsigned L   = 512,
  parameter int unsigned D   = 768,
  parameter int unsigned NPE = 32,
  parameter int unsigned BO  = 13,
  localparam int unsigned NG = D / NPE,
  localparam int unsigned MA = $clog2(L*NG),
  localparam int unsigned GA = (NG > 1) ? $clog2(NG) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic signed [15:0]            scale,
  output logic                          busy,
  output logic                          done,
  // residual / output buffer
  output logic [MA-1:0]                 res_raddr,
  input  logic [NPE-1:0][15:0]          res_rdata,
  // integer RBMM output buffer
  output logic [MA-1:0]                 e_raddr,
  input  logic [NPE-1:0][BO-1:0]        e_rdata,
  // gamma / beta buffers (same address)
  output logic [GA-1:0]                 par_raddr,
  input  logic [NPE-1:0][15:0]          gamma_rdata,
  input  logic [NPE-1:0][15:0]          beta_rdata,
  // normalised output
  output logic                          out_valid,
  output logic [MA-1:0]                 out_addr,
  output logic [$clog2(L)-1:0]          out_row,
  output logic [GA-1:0]                 out_g,
  output logic [NPE-1:0][15:0]          out_y
);
  typedef enum logic [2:0] {S_IDLE, S_ACC, S_MEAN, S_MSQ, S_SQRT, S_INV, S_NORM} state_e;
  state_e st;

  logic [$clog2(L)-1:0] row;
  logic [GA-1:0]        g;       // issue index
  logic                 rv;      // read data valid next stage
  logic [GA-1:0]        g_d;
  logic signed [31:0]   sum;
  logic [47:0]          sumsq;
  logic signed [31:0]   mean;
  logic [47:0]          msq;
  logic [16:0]          inv;

  // local row buffer
  logic                 lb_we;
  logic [NPE-1:0][15:0] lb_wdata, lb_rdata;
  sdp_ram #(.WIDTH(NPE*16), .DEPTH(NG)) u_lb (
    .clk, .we(lb_we), .waddr(g_d), .wdata(lb_wdata), .wmask('1),
    .raddr(g), .rdata(lb_rdata)
  );

  function automatic logic signed [15:0] sat16(input logic signed [63:0] v);
    if (v > 64'sd32767)  return 16'sh7fff;
    if (v < -64'sd32768) return 16'sh8000;
    return v[15:0];
  endfunction

  // stage-1 arithmetic
  logic signed [63:0] lane_sum;
  logic [47:0]        lane_sq;
  always_comb begin
    lane_sum = '0; lane_sq = '0;
    for (int p = 0; p < NPE; p++) begin
      logic signed [63:0] e, x;
      e = 64'(signed'(e_rdata[p]));
      x = 64'(sat16(64'(signed'(res_rdata[p])) + ((e * 64'(scale)) >>> 8)));
      lb_wdata[p] = x[15:0];
      lane_sum = lane_sum + x;
      lane_sq  = lane_sq + 48'(x * x);
    end
  end

  // divider / sqrt
  logic        dv_start, dv_busy, dv_done;
  logic [47:0] dv_a, dv_b, dv_q;
  logic        sq_start, sq_busy, sq_done;
  logic [23:0] sq_root;
  logic [47:0] var_c;
  seq_div   #(.W(48)) u_div (.clk, .rst_n, .start(dv_start), .dividend(dv_a), .divisor(dv_b),
                             .busy(dv_busy), .done(dv_done), .quotient(dv_q));
  seq_isqrt #(.W(48)) u_sqrt (.clk, .rst_n, .start(sq_start), .x(var_c),
                             .busy(sq_busy), .done(sq_done), .root(sq_root));

  always_comb begin
    logic signed [63:0] m2;
    m2 = 64'(mean) * 64'(mean);
    var_c = (64'(msq) > m2) ? 48'(64'(msq) - m2) : 48'd0;
  end

  // normalisation
  always_comb begin
    for (int p = 0; p < NPE; p++) begin
      logic signed [63:0] n, t;
      n = ((64'(signed'(lb_rdata[p])) - 64'(mean)) * 64'(signed'({1'b0, inv}))) >>> 8;
      t = (n * 64'(signed'(gamma_rdata[p]))) >>> 8;
      out_y[p] = sat16(t + 64'(signed'(beta_rdata[p])));
    end
  end

  assign res_raddr = MA'(row) * MA'(NG) + MA'(g);
  assign e_raddr   = res_raddr;
  assign par_raddr = g;
  assign busy      = (st != S_IDLE);
  assign lb_we     = (st == S_ACC) && rv;
  assign out_valid = (st == S_NORM) && rv;
  assign out_row   = row;
  assign out_g     = g_d;
  assign out_addr  = MA'(row) * MA'(NG) + MA'(g_d);

  logic [47:0] abs_sum;
  assign abs_sum = sum[31] ? 48'(-sum) : 48'(sum);

  // issue pointer g runs over the NG groups; rv marks that the read data of
  // group g_d is present in this cycle
  logic issuing, iss_end;
  assign issuing = ((st == S_ACC) || (st == S_NORM)) && !iss_end;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; row <= '0; g <= '0; rv <= 1'b0; g_d <= '0; done <= 1'b0; iss_end <= 1'b0;
      sum <= '0; sumsq <= '0; mean <= '0; msq <= '0; inv <= '0;
      dv_start <= 1'b0; dv_a <= '0; dv_b <= '0; sq_start <= 1'b0;
    end else begin
      done <= 1'b0; dv_start <= 1'b0; sq_start <= 1'b0;
      rv  <= issuing;
      g_d <= g;
      if (issuing) begin
        if (g == GA'(NG - 1)) iss_end <= 1'b1;
        else                  g <= g + 1'b1;
      end
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_ACC; row <= '0; g <= '0; iss_end <= 1'b0; sum <= '0; sumsq <= '0;
        end
        S_ACC: begin
          if (rv) begin
            sum   <= sum + 32'(lane_sum);
            sumsq <= sumsq + lane_sq;
            if (g_d == GA'(NG - 1)) st <= S_MEAN;
          end
        end
        S_MEAN: begin
          if (!dv_busy && !dv_done && !dv_start) begin
            dv_start <= 1'b1; dv_a <= abs_sum; dv_b <= 48'(D);
          end
          if (dv_done) begin
            mean <= sum[31] ? -32'(dv_q) : 32'(dv_q);
            st <= S_MSQ; dv_start <= 1'b1; dv_a <= sumsq; dv_b <= 48'(D);
          end
        end
        S_MSQ: if (dv_done) begin
          msq <= dv_q; st <= S_SQRT; sq_start <= 1'b1;
        end
        S_SQRT: if (sq_done) begin
          st <= S_INV; dv_start <= 1'b1; dv_a <= 48'h10000;
          dv_b <= (sq_root == 0) ? 48'd1 : 48'(sq_root);
        end
        S_INV: if (dv_done) begin
          inv <= 17'(dv_q); st <= S_NORM; g <= '0; iss_end <= 1'b0;
        end
        S_NORM: begin
          if (rv && g_d == GA'(NG - 1)) begin
            if (row == $clog2(L)'(L - 1)) begin
              st <= S_IDLE; done <= 1'b1;
            end else begin
              row <= row + 1'b1; g <= '0; iss_end <= 1'b0; st <= S_ACC; sum <= '0; sumsq <= '0;
            end
          end
        end
        default: ;
      endcase
    end
  end
endmodule
