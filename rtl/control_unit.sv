// control_unit -- six-state controller of the two-register processor.
//
// Moore machine over S0..S5; every output is a function of the state only
// (the control word below). Reset = 1 forces S5 at once (asynchronous) and
// holds it; S5 clears the registers. After reset the sequence is
// S5 -> S0 (load both inputs) -> S1 (test) and from S1: neq0 = 1 -> S4,
// else neq1 = 1 -> S2 (X <= X - Y), else S3 (Y <= Y - X); S2 and S3 return
// to S1. S4 drives OE and Done for one clock and then goes to S5, which
// clears and reloads: with the inputs held the result reappears every pass.
//
//   state  In_X In_Y XLoad YLoad XY Clear ALUSel OE Done
//   S0      1    1    1     1    0   0    101    0   0
//   S1      0    0    0     0    0   0    101    0   0
//   S2      0    0    1     0    1   0    101    0   0
//   S3      0    0    0     1    0   0    101    0   0
//   S4      0    0    0     0    0   0    101    1   1
//   S5      1    1    0     0    0   1    101    0   0
//
// The table and the transitions out of S5, S0, S1, S2 and S3 follow the
// paper; the exit of S4 (to S5) is this design's choice.
module control_unit
  import cordic_pkg::*;
(
  input  logic    clock,
  input  logic    reset,
  input  logic    neq0,
  input  logic    neq1,
  output logic    in_x,
  output logic    in_y,
  output logic    xload,
  output logic    yload,
  output logic    xy,
  output logic    clear,
  output alu_op_e alusel,
  output logic    oe,
  output logic    done
);
  state_e state, next;

  always_ff @(posedge clock or posedge reset) begin
    if (reset) state <= S5;
    else       state <= next;
  end

  always_comb begin
    unique case (state)
      S5: next = S0;
      S0: next = S1;
      S1: next = neq0 ? S4 : (neq1 ? S2 : S3);
      S2: next = S1;
      S3: next = S1;
      S4: next = S5;
      default: next = S5;
    endcase
  end

  always_comb begin
    {in_x, in_y, xload, yload, xy, clear, oe, done} = '0;
    alusel = ALU_SUB;
    unique case (state)
      S0: {in_x, in_y, xload, yload} = 4'b1111;
      S1: ;
      S2: {xload, xy} = 2'b11;
      S3: yload = 1'b1;
      S4: {oe, done} = 2'b11;
      S5: {in_x, in_y, clear} = 3'b111;
      default: clear = 1'b1;
    endcase
  end

  // Done is a one-clock pulse, and loads never coincide with Clear
  a_done_pulse: assert property (@(posedge clock) done |=> !done);
  a_clear_excl: assert property (@(posedge clock) clear |-> !(xload || yload));
endmodule
