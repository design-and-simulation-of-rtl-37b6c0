// mux2 -- 2:1 multiplexer, the "Multiplexer" boxes of the processor datapath.
// sel = 1 passes d1, sel = 0 passes d0. In the two-register datapath d1 is the
// external input and d0 the ALU result (In_X / In_Y = 1 while operands load);
// as operand selector it is steered by XY. Purely combinational.
module mux2 #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             sel,
  input  logic [WIDTH-1:0] d1,
  input  logic [WIDTH-1:0] d0,
  output logic [WIDTH-1:0] y
);
  always_comb y = sel ? d1 : d0;
endmodule
