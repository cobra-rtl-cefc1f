// compressor63: ROM-based 6:3 compressor. Returns the number of ones among
// six input bits as a 3-bit count. As in the paper the function is held in a
// 64-entry x 3-bit table; the table is filled at elaboration by counting
// the bits of each address. Purely combinational.
module compressor63 (
  input  logic [5:0] in,
  output logic [2:0] cnt
);
  typedef logic [2:0] rom_t [64];

  function automatic rom_t build_rom();
    rom_t r;
    for (int a = 0; a < 64; a++) begin
      r[a] = 3'($countones(6'(a)));
    end
    return r;
  endfunction

  localparam rom_t ROM = build_rom();

  assign cnt = ROM[in];
endmodule
