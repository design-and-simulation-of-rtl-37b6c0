// tristate_buffer -- output buffer of the processor ("Tristate Buffer", OE).
// With oe = 1 the output follows a; with oe = 0 it floats (high impedance),
// so the result is visible only in the output state. Combinational.
module tristate_buffer #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             oe,
  input  logic [WIDTH-1:0] a,
  output tri   [WIDTH-1:0] y
);
  assign y = oe ? a : 'z;
endmodule
