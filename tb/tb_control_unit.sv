// tb_control_unit -- checks the control word of each state against the
// state table and the state sequence against the state diagram:
// reset -> S5; S5 -> S0 -> S1; in S1 neq0 -> S4, else neq1 -> S2, else S3;
// S2 / S3 -> S1; S4 -> S5 (this design's choice). neq0 / neq1 are driven
// at random, and the bench keeps its own copy of the expected state.
module tb_control_unit;
  import cordic_pkg::*;
  logic    clock = 0, reset, neq0, neq1;
  logic    in_x, in_y, xload, yload, xy, clear, oe, done;
  alu_op_e alusel;
  int checks = 0, failures = 0;
  int visits[6];

  control_unit dut (.*);

  always #5 clock = ~clock;

  // {In_X, In_Y, XLoad, YLoad, XY, Clear, ALU2..0, OE, Done} per state
  function automatic logic [10:0] word_of(int s);
    case (s)
      0: return 11'b1_1_1_1_0_0_101_0_0;
      1: return 11'b0_0_0_0_0_0_101_0_0;
      2: return 11'b0_0_1_0_1_0_101_0_0;
      3: return 11'b0_0_0_1_0_0_101_0_0;
      4: return 11'b0_0_0_0_0_0_101_1_1;
      default: return 11'b1_1_0_0_0_1_101_0_0;
    endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clock);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int es;
    reset = 1; neq0 = 0; neq1 = 0;
    repeat (3) @(posedge clock);
    #1;
    checks++; if (dut.state != S5) failures++;   // held while reset = 1
    reset = 0;
    es = 5;
    for (int n = 0; n < 2000; n++) begin
      neq0 = ($urandom % 4) == 0;
      neq1 = 1'($urandom);
      #1;
      checks++;
      if ({in_x, in_y, xload, yload, xy, clear, alusel, oe, done} !== word_of(es)
          || int'(dut.state) != es) begin
        failures++;
        $display("FAIL state=%0d expected S%0d word=%b", dut.state, es,
                 {in_x, in_y, xload, yload, xy, clear, alusel, oe, done});
      end
      visits[es]++;
      case (es)
        5: es = 0;
        0: es = 1;
        1: es = neq0 ? 4 : (neq1 ? 2 : 3);
        2, 3: es = 1;
        default: es = 5;
      endcase
      @(posedge clock);
      #1;
    end
    for (int s = 0; s < 6; s++) begin
      checks++;
      if (visits[s] == 0) begin failures++; $display("FAIL S%0d never reached", s); end
    end
    // asynchronous reset from the middle of a run
    while (dut.state == S5) begin @(posedge clock); #1; end
    #2; reset = 1; #1;
    checks++; if (dut.state != S5) begin failures++; $display("FAIL asynchronous reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
