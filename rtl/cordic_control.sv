// cordic_control -- sequencer of the CORDIC sine/cosine engine.
//
// It uses the same six states and the same transition graph as the control
// unit of the two-register processor, with the control word redefined for the
// rotation: S5 clears the registers and waits (self-loop) for angle_valid,
// capturing the angle when it comes; S0 loads the start vector and angle;
// S1 tests the comparator status: neq0 (the iteration counter has reached
// ITERATIONS) -> S4, else neq1 (residual angle z >= 0) -> S2 (rotate with
// d = +1), else S3 (rotate with d = -1); S2 and S3 update x, y, z and the
// counter and go back to S1. S4 enables the output buffers and raises
// ready for one clock, then returns to S5.
// Latency from the clock that samples angle_valid in S5 to ready:
// 2*ITERATIONS + 3 clocks (S0, N x (S1, S2|S3), S1, then S4).
// rstn is asynchronous, active low, and forces S5.
module cordic_control
  import cordic_pkg::*;
(
  input  logic   clk,
  input  logic   rstn,
  input  logic   angle_valid,
  input  logic   neq0,
  input  logic   neq1,
  output logic   angle_load,
  output logic   ln,
  output logic   load,
  output logic   clear,
  output logic   rot_pos,
  output logic   oe,
  output logic   ready
);
  state_e state, next;

  always_ff @(posedge clk or negedge rstn) begin
    if (!rstn) state <= S5;
    else       state <= next;
  end

  always_comb begin
    unique case (state)
      S5: next = angle_valid ? S0 : S5;
      S0: next = S1;
      S1: next = neq0 ? S4 : (neq1 ? S2 : S3);
      S2: next = S1;
      S3: next = S1;
      S4: next = S5;
      default: next = S5;
    endcase
  end

  always_comb begin
    {angle_load, ln, load, clear, rot_pos, oe, ready} = '0;
    unique case (state)
      S5: begin clear = 1'b1; angle_load = angle_valid; end
      S0: begin ln = 1'b1; load = 1'b1; end
      S1: ;
      S2: begin load = 1'b1; rot_pos = 1'b1; end
      S3: load = 1'b1;
      S4: begin oe = 1'b1; ready = 1'b1; end
      default: clear = 1'b1;
    endcase
  end

  // handshake rules: ready is a one-clock pulse, and the outputs are driven
  // exactly while ready is high
  a_ready_pulse: assert property (@(posedge clk) ready |=> !ready);
  a_ready_oe:    assert property (@(posedge clk) ready == oe);
endmodule
