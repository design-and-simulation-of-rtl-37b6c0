// comparator -- status generator of the processor: eq (neq0) is a == b and
// gt (neq1) is a > b. SIGNED = 0 compares unsigned values (the two-register
// datapath); SIGNED = 1 compares two's-complement values (the CORDIC angle
// sign test). Combinational.
module comparator #(
  parameter int unsigned WIDTH  = 8,
  parameter bit          SIGNED = 1'b0
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  output logic             eq,
  output logic             gt
);
  always_comb begin
    eq = (a == b);
    if (SIGNED) gt = ($signed(a) > $signed(b));
    else        gt = (a > b);
  end
endmodule
