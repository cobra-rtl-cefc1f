// tb_layernorm_unit: residual + LayerNorm unit with l = 6, d = 64, 8 lanes.
// Memories with one-cycle read latency are modelled here (residual buffer,
// integer buffer, gamma/beta); normalised values are written back into the
// residual model as the top level does. Rows cover random data, a
// constant row (zero variance, std clamped to 1), saturating residual sums
// and negative means. Every output lane is compared with a fixed-point model
// of the same equations written here, along with out_addr/out_row/out_g,
// each group appearing exactly once, and done.
module tb_layernorm_unit;
  localparam int L = 6, D = 64, NPE = 8, BO = 13, NG = D / NPE;
  localparam int MA = $clog2(L * NG), GA = $clog2(NG);
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done, out_valid;
  logic signed [15:0] scale;
  logic [MA-1:0] res_raddr, e_raddr, out_addr;
  logic [GA-1:0] par_raddr, out_g;
  logic [$clog2(L)-1:0] out_row;
  logic [NPE-1:0][15:0] res_rdata, gamma_rdata, beta_rdata, out_y;
  logic [NPE-1:0][BO-1:0] e_rdata;
  int checks = 0, failures = 0;

  layernorm_unit #(.L(L), .D(D), .NPE(NPE), .BO(BO)) dut (.*);

  logic [NPE-1:0][15:0] resm [L*NG];
  logic [NPE-1:0][BO-1:0] em [L*NG];
  logic [NPE-1:0][15:0] gm [NG], bm [NG];
  always @(posedge clk) begin
    res_rdata   <= resm[res_raddr];
    e_rdata     <= em[e_raddr];
    gamma_rdata <= gm[par_raddr];
    beta_rdata  <= bm[par_raddr];
    if (out_valid) resm[out_addr] <= out_y;
  end

  longint yref [L][D];
  int seen [L*NG];

  function automatic longint sat(longint v);
    return v > 32767 ? 32767 : v < -32768 ? -32768 : v;
  endfunction
  function automatic longint isqrt(longint v);
    longint r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  initial begin
    for (int a = 0; a < L * NG; a++) seen[a] = 0;
    scale = 16'sd40;
    for (int g = 0; g < NG; g++) for (int p = 0; p < NPE; p++) begin
      gm[g][p] = 16'(int'($urandom_range(600)) - 100);
      bm[g][p] = 16'(int'($urandom_range(400)) - 200);
    end
    for (int i = 0; i < L; i++) for (int c = 0; c < D; c++) begin
      int r, e;
      case (i)
        1: begin r = 300; e = 0; end                                     // constant row
        2: begin r = 32000; e = int'($urandom_range(4000)); end          // saturation
        3: begin r = -int'($urandom_range(3000)) - 500; e = int'($urandom_range(200)) - 100; end
        default: begin r = int'($urandom_range(1200)) - 600; e = int'($urandom_range(800)) - 400; end
      endcase
      resm[i * NG + c / NPE][c % NPE] = 16'(r);
      em[i * NG + c / NPE][c % NPE]   = BO'(e);
    end
    // reference
    for (int i = 0; i < L; i++) begin
      longint x [D];
      longint sum, sq, mean, var_, sd, inv;
      sum = 0; sq = 0;
      for (int c = 0; c < D; c++) begin
        longint r, e;
        r = longint'(signed'(resm[i * NG + c / NPE][c % NPE]));
        e = longint'(signed'(em[i * NG + c / NPE][c % NPE]));
        x[c] = sat(r + ((e * longint'(scale)) >>> 8));
        sum += x[c]; sq += x[c] * x[c];
      end
      mean = sum / D;
      var_ = sq / D - mean * mean;
      if (var_ < 0) var_ = 0;
      sd = isqrt(var_);
      if (sd == 0) sd = 1;
      inv = 65536 / sd;
      for (int c = 0; c < D; c++) begin
        longint n, t;
        n = ((x[c] - mean) * inv) >>> 8;
        t = (n * longint'(signed'(gm[c / NPE][c % NPE]))) >>> 8;
        yref[i][c] = sat(t + longint'(signed'(bm[c / NPE][c % NPE])));
      end
    end
    rst_n = 0; start = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    @(posedge clk iff done);
    @(negedge clk);
    checks++;
    if (busy) failures++;
    for (int a = 0; a < L * NG; a++) begin
      checks++;
      if (seen[a] != 1) begin failures++; $display("group %0d output %0d times", a, seen[a]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int i, g;
    i = int'(out_row); g = int'(out_g);
    checks++;
    if (int'(out_addr) != i * NG + g) begin failures++; $display("out_addr %0d for row %0d group %0d", out_addr, i, g); end
    seen[i * NG + g]++;
    for (int p = 0; p < NPE; p++) begin
      checks++;
      if (longint'(signed'(out_y[p])) != yref[i][g * NPE + p]) begin
        failures++;
        if (failures < 10) $display("row %0d col %0d: y %0d expected %0d", i, g * NPE + p, signed'(out_y[p]), yref[i][g * NPE + p]);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
