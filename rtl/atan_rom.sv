// atan_rom -- arctangent look-up table of the CORDIC engine.
// For iteration index i it returns arctan(2^-i) as a binary angle of Z_W bits
// (2^Z_W units per full turn, so pi = 2^(Z_W-1)): the 32-bit constant
// round(atan(2^-i) / (2*pi) * 2^32) rounded to Z_W bits. Z_W may be 8..32.
// Combinational (a ROM addressed by the iteration counter).
module atan_rom
  import cordic_pkg::*;
#(
  parameter int unsigned Z_W   = 32,
  parameter int unsigned IDX_W = 5
) (
  input  logic [IDX_W-1:0] idx,
  output logic [Z_W-1:0]   atan_o
);
  localparam int unsigned DROP = 32 - Z_W;

  always_comb begin
    logic [32:0] full;
    full = {1'b0, atan_bam32(int'(idx))};
    if (DROP > 0) full = full + (33'd1 << (DROP > 0 ? DROP - 1 : 0));
    atan_o = Z_W'(full >> DROP);
  end
endmodule
