// tb_dedicated_processor -- the two-register processor end to end. For
// random non-zero inputs it waits for done and checks the output against
// gcd(input_x, input_y) (the value the repeated subtraction leaves), and the
// number of clocks from leaving reset to done against the count of
// subtraction steps: 3 + 2 * steps (S5, S0, steps x (S1, S2|S3), S1, then
// done in S4).
module tb_dedicated_processor;
  logic       clock = 0, reset, done;
  logic [7:0] input_x, input_y;
  tri   [7:0] data_out;
  int checks = 0, failures = 0;

  dedicated_processor dut (.*);

  always #5 clock = ~clock;

  initial begin
    repeat (400000) @(posedge clock);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, b, g, y, steps, cycles;
    for (int n = 0; n < 200; n++) begin
      a = 1 + ($urandom % 255); b = 1 + ($urandom % 255);
      if (n == 0) begin a = 3; b = 2; end
      if (n == 1) begin a = 77; b = 77; end
      steps = 0; g = a; y = b;
      while (g != y) begin if (g > y) g -= y; else y -= g; steps++; end
      reset = 1; input_x = 8'(a); input_y = 8'(b);
      @(posedge clock); #1;
      reset = 0;
      cycles = 0;
      while (!done) begin @(posedge clock); #1; cycles++; end
      checks += 2;
      if (int'(data_out) != g) begin
        failures++; $display("FAIL gcd(%0d,%0d): out=%0d expected %0d", a, b, data_out, g);
      end
      if (cycles != 3 + 2 * steps) begin
        failures++; $display("FAIL cycles %0d expected %0d", cycles, 3 + 2 * steps);
      end
      // the machine restarts (S4 -> S5 -> S0) and shows the same result again
      cycles = 0;
      @(posedge clock); #1;
      while (!done) begin @(posedge clock); #1; cycles++; end
      checks++;
      if (int'(data_out) != g || cycles != 3 + 2 * steps) begin
        failures++; $display("FAIL second pass out=%0d cycles=%0d", data_out, cycles);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
