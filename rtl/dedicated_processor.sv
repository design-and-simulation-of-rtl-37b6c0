// dedicated_processor -- the two-register processor: datapath plus control unit.
//
// After reset it loads input_x and input_y, then repeatedly subtracts the
// smaller register from the larger (X <= X - Y when X > Y, Y <= Y - X when
// X < Y) until the two are equal, and then shows X on data_out with done = 1
// for one clock. For non-zero inputs this is Euclid's subtractive algorithm,
// so the result is gcd(input_x, input_y); with one input zero and the other
// not, the loop never ends (the paper does not cover that case).
// Timing: 2 clocks per subtraction, plus S5, S0, the final S1 and S4.
// The inputs must stay stable from S5 to S0; the machine restarts after S4.
module dedicated_processor
  import cordic_pkg::*;
#(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clock,
  input  logic             reset,
  input  logic [WIDTH-1:0] input_x,
  input  logic [WIDTH-1:0] input_y,
  output tri   [WIDTH-1:0] data_out,
  output logic             done
);
  logic    in_x, in_y, xload, yload, xy, clear, oe, neq0, neq1;
  alu_op_e alusel;

  control_unit u_cu (
    .clock, .reset, .neq0, .neq1, .in_x, .in_y, .xload, .yload, .xy, .clear,
    .alusel, .oe, .done
  );

  datapath #(.WIDTH(WIDTH)) u_dp (
    .clock, .input_x, .input_y, .in_x, .in_y, .xload, .yload, .clear, .xy,
    .alusel, .oe, .neq0, .neq1, .data_out
  );
endmodule
