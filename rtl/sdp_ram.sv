// sdp_ram: simple dual-port on-chip RAM used for every buffer of the
// accelerator (block RAM / URAM on an FPGA). One write port with a per-bit
// write mask, so that packed datapacks can be filled a few bits at a time,
// and one read port with a registered output (read data one cycle after
// raddr). The contents are not reset. Sizes are set by the instance.
module sdp_ram #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [WIDTH-1:0] wmask,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= (mem[waddr] & ~wmask) | (wdata & wmask);
    rdata <= mem[raddr];
  end
endmodule
