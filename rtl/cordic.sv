// cordic -- top level: the 8-bit sine/cosine processor.
//
// Interface (the CORDIC block of the paper's schematic): angle[7:0] with
// angle_valid, clk, rstn (asynchronous, active low), and cosout[7:0],
// sinout[7:0] with ready. angle is a binary angle (256 units per turn,
// 64 = pi/2, 128 = pi); cosout and sinout are signed Q1.6 (64 = 1.0).
// While idle the engine waits in its clear state; a clock edge that sees
// angle_valid = 1 captures angle, and 2*ITERATIONS + 3 clocks later ready is
// high for one clock with the results on cosout / sinout (high impedance at
// all other times). The next angle_valid is accepted from the clock after
// ready.
//
// The same chip also carries the two-register dedicated processor that the
// paper draws as its datapath and control unit (dp_* ports, reset = !rstn).
// Its control word subtracts the smaller register from the larger until
// they match, which is not a sine/cosine computation, so it is kept as a
// separate unit with its own pins rather than wired into the CORDIC engine.
module cordic
  import cordic_pkg::*;
#(
  parameter int unsigned IO_W       = 8,
  parameter int unsigned XY_W       = 17,
  parameter int unsigned Z_W        = 32,
  parameter int unsigned ITERATIONS = 16
) (
  input  logic            clk,
  input  logic            rstn,
  input  logic [IO_W-1:0] angle,
  input  logic            angle_valid,
  output tri   [IO_W-1:0] cosout,
  output tri   [IO_W-1:0] sinout,
  output logic            ready,
  // two-register dedicated processor
  input  logic [IO_W-1:0] dp_input_x,
  input  logic [IO_W-1:0] dp_input_y,
  output tri   [IO_W-1:0] dp_output,
  output logic            dp_done
);
  logic   angle_load, ln, load, clear, rot_pos, oe, neq0, neq1;

  cordic_control u_ctrl (
    .clk, .rstn, .angle_valid, .neq0, .neq1, .angle_load, .ln, .load, .clear,
    .rot_pos, .oe, .ready
  );

  cordic_datapath #(
    .IO_W(IO_W), .XY_W(XY_W), .Z_W(Z_W), .ITERATIONS(ITERATIONS)
  ) u_dp (
    .clk, .angle, .angle_load, .ln, .load, .clear, .rot_pos, .oe, .neq0, .neq1,
    .cosout, .sinout
  );

  dedicated_processor #(.WIDTH(IO_W)) u_proc (
    .clock(clk), .reset(!rstn), .input_x(dp_input_x), .input_y(dp_input_y),
    .data_out(dp_output), .done(dp_done)
  );
endmodule
