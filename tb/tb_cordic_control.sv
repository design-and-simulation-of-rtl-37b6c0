// tb_cordic_control -- the CORDIC sequencer with random status inputs. The
// bench keeps its own expected state (S5 waits for angle_valid, S5 -> S0 ->
// S1; S1: neq0 -> S4, neq1 -> S2, else S3; S2 / S3 -> S1; S4 -> S5) and
// checks the control outputs of every state, that each state is reached,
// and the asynchronous active-low reset.
module tb_cordic_control;
  import cordic_pkg::*;
  logic   clk = 0, rstn, angle_valid, neq0, neq1;
  logic   angle_load, ln, load, clear, rot_pos, oe, ready;
  int checks = 0, failures = 0;
  int visits[6];

  cordic_control dut (.*);

  always #5 clk = ~clk;

  // {angle_load, ln, load, clear, rot_pos, oe, ready}
  function automatic logic [6:0] word_of(int s, logic av);
    case (s)
      0: return 7'b0110000;
      1: return 7'b0000000;
      2: return 7'b0010100;
      3: return 7'b0010000;
      4: return 7'b0000011;
      default: return {av, 6'b001000};
    endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int es;
    rstn = 0; angle_valid = 0; neq0 = 0; neq1 = 0;
    repeat (2) @(posedge clk);
    #1;
    checks++; if (dut.state != S5) failures++;
    rstn = 1;
    es = 5;
    for (int n = 0; n < 3000; n++) begin
      angle_valid = ($urandom % 3) == 0;
      neq0 = ($urandom % 5) == 0;
      neq1 = 1'($urandom);
      #1;
      checks++;
      if ({angle_load, ln, load, clear, rot_pos, oe, ready} !== word_of(es, angle_valid)
          || int'(dut.state) != es) begin
        failures++;
        $display("FAIL state=%0d expected S%0d", dut.state, es);
      end
      visits[es]++;
      case (es)
        5: es = angle_valid ? 0 : 5;
        0: es = 1;
        1: es = neq0 ? 4 : (neq1 ? 2 : 3);
        2, 3: es = 1;
        default: es = 5;
      endcase
      @(posedge clk);
      #1;
    end
    for (int s = 0; s < 6; s++) begin
      checks++;
      if (visits[s] == 0) begin failures++; $display("FAIL S%0d never reached", s); end
    end
    while (dut.state == S5) begin angle_valid = 1; @(posedge clk); #1; end
    #2; rstn = 0; #1;
    checks++; if (dut.state != S5) begin failures++; $display("FAIL asynchronous reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
