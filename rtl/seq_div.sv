// seq_div: unsigned restoring divider, one quotient bit per cycle.
// start loads dividend and divisor; done pulses W + 1 cycles later with
// quotient = floor(dividend / divisor). A zero divisor gives all ones.
// Helper of the LayerNorm unit.
module seq_div #(
  parameter int unsigned W = 48
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient
);
  logic [W-1:0] rem, dsr, q;
  logic [$clog2(W+1)-1:0] n;
  logic [W:0] trial;

  assign trial = {rem[W-1:0], q[W-1]} - {1'b0, dsr};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem <= '0; dsr <= '0; q <= '0; n <= '0; busy <= 1'b0; done <= 1'b0; quotient <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        rem <= '0; dsr <= divisor; q <= dividend; n <= $clog2(W+1)'(W); busy <= 1'b1;
      end else if (busy) begin
        if (!trial[W]) begin
          rem <= trial[W-1:0];
          q   <= {q[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-2:0], q[W-1]};
          q   <= {q[W-2:0], 1'b0};
        end
        n <= n - 1'b1;
        if (n == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          quotient <= trial[W] ? {q[W-2:0], 1'b0} : {q[W-2:0], 1'b1};
        end
      end
    end
  end
endmodule
