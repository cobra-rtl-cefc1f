// seq_isqrt: integer square root, floor(sqrt(x)), by the digit-by-digit
// method, one result bit per cycle; start loads x and done (W/2 + 1 cycles later)
// comes with root. Helper of the LayerNorm unit.
module seq_isqrt #(
  parameter int unsigned W = 48   // even
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   x,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);
  logic [W-1:0]   xr;
  logic [W/2+1:0] rem;
  logic [W/2-1:0] r;
  logic [$clog2(W/2+1)-1:0] n;
  logic [W/2+1:0] shifted, trial;

  assign shifted = {rem[W/2-1:0], xr[W-1:W-2]};
  assign trial   = shifted - {r, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xr <= '0; rem <= '0; r <= '0; n <= '0; busy <= 1'b0; done <= 1'b0; root <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        xr <= x; rem <= '0; r <= '0; n <= $clog2(W/2+1)'(W/2); busy <= 1'b1;
      end else if (busy) begin
        xr <= {xr[W-3:0], 2'b00};
        if (!trial[W/2+1]) begin
          rem <= trial;
          r   <= {r[W/2-2:0], 1'b1};
        end else begin
          rem <= shifted;
          r   <= {r[W/2-2:0], 1'b0};
        end
        n <= n - 1'b1;
        if (n == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          root <= trial[W/2+1] ? {r[W/2-2:0], 1'b0} : {r[W/2-2:0], 1'b1};
        end
      end
    end
  end
endmodule
