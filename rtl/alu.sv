// alu -- WIDTH-bit arithmetic logic unit with a 3-bit select (ALU2..ALU0).
// Code 101 computes A - B, the subtraction the processor's control word
// always selects; the other codes (pass, and, or, not, add, increment,
// decrement) are this design's choice of the remaining seven operations.
// The CORDIC engine uses 100 (add), 101 (subtract) and 110 (increment).
// Combinational; results wrap modulo 2^WIDTH.
module alu
  import cordic_pkg::*;
#(
  parameter int unsigned WIDTH = 8
) (
  input  alu_op_e          op,
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  output logic [WIDTH-1:0] y
);
  always_comb begin
    unique case (op)
      ALU_PASS: y = a;
      ALU_AND:  y = a & b;
      ALU_OR:   y = a | b;
      ALU_NOT:  y = ~a;
      ALU_ADD:  y = a + b;
      ALU_SUB:  y = a - b;
      ALU_INC:  y = a + WIDTH'(1);
      ALU_DEC:  y = a - WIDTH'(1);
      default:  y = a;
    endcase
  end
endmodule
