// datapath -- the two-register datapath of the dedicated processor.
//
// Each of the registers X and Y is fed by a 2:1 multiplexer that picks either
// the external input (In_X / In_Y = 1) or the ALU result (= 0); XLoad / YLoad
// load them and Clear zeroes both. A pair of operand multiplexers steered by
// XY routes (A, B) = (X, Y) when XY = 1 and (Y, X) when XY = 0, so with the
// ALU on subtract (ALU = 101) the ALU computes X - Y or Y - X. The ALU result
// is fed back to both input multiplexers. A comparator on X and Y gives
// neq0 = (X == Y) and neq1 = (X > Y, unsigned). X reaches the output pin
// through the tristate buffer, enabled by OE.
//
// Timing: registers load on the rising clock edge; the comparator, the ALU and
// the output are combinational from the register contents.
// The structure follows the block diagram of the processor. The polarity of
// XY and of the input multiplexers is read from the control word (S0 loads the
// inputs with In_X = In_Y = 1; S2 loads X with XY = 1 and S3 loads Y with
// XY = 0, matching "X-Y or Y-X"); the unsigned comparison is this design's choice.
module datapath
  import cordic_pkg::*;
#(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clock,
  input  logic [WIDTH-1:0] input_x,
  input  logic [WIDTH-1:0] input_y,
  input  logic             in_x,
  input  logic             in_y,
  input  logic             xload,
  input  logic             yload,
  input  logic             clear,
  input  logic             xy,
  input  alu_op_e          alusel,
  input  logic             oe,
  output logic             neq0,
  output logic             neq1,
  output tri   [WIDTH-1:0] data_out
);
  logic [WIDTH-1:0] x_d, y_d, x_q, y_q, opa, opb, alu_y;

  mux2 #(.WIDTH(WIDTH)) u_mux_x (.sel(in_x), .d1(input_x), .d0(alu_y), .y(x_d));
  mux2 #(.WIDTH(WIDTH)) u_mux_y (.sel(in_y), .d1(input_y), .d0(alu_y), .y(y_d));

  register_unit #(.WIDTH(WIDTH)) u_reg_x (.clk(clock), .clear(clear), .load(xload), .d(x_d), .q(x_q));
  register_unit #(.WIDTH(WIDTH)) u_reg_y (.clk(clock), .clear(clear), .load(yload), .d(y_d), .q(y_q));

  mux2 #(.WIDTH(WIDTH)) u_mux_a (.sel(xy), .d1(x_q), .d0(y_q), .y(opa));
  mux2 #(.WIDTH(WIDTH)) u_mux_b (.sel(xy), .d1(y_q), .d0(x_q), .y(opb));

  alu #(.WIDTH(WIDTH)) u_alu (.op(alusel), .a(opa), .b(opb), .y(alu_y));

  comparator #(.WIDTH(WIDTH), .SIGNED(1'b0)) u_cmp (.a(x_q), .b(y_q), .eq(neq0), .gt(neq1));

  tristate_buffer #(.WIDTH(WIDTH)) u_tri (.oe(oe), .a(x_q), .y(data_out));
endmodule
