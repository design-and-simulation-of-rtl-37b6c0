// tb_cordic_datapath -- the CORDIC datapath at its default sizes, with the
// bench acting as the controller: capture the angle, load the start vector,
// then step with d = +1 while neq1 (z >= 0) and d = -1 otherwise until neq0.
// Checked for every one of the 256 input angles:
//  - neq0 rises after exactly ITERATIONS steps,
//  - the full-precision x and y are within 2^-12 of cos and sin of the
//    angle (computed with real arithmetic),
//  - the rounded 8-bit outputs are within one Q1.6 step of round(64*cos)
//    and round(64*sin), and the residual angle z is small.
module tb_cordic_datapath;
  localparam real PI = 3.14159265358979323846;
  localparam int  N  = 16;
  logic       clk = 0;
  logic [7:0] angle;
  logic       angle_load, ln, load, clear, rot_pos, oe, neq0, neq1;
  tri   [7:0] cosout, sinout;
  int checks = 0, failures = 0;

  function automatic real absr(real v);
    return v < 0.0 ? -v : v;
  endfunction

  cordic_datapath dut (.*);

  always #5 clk = ~clk;

  function automatic int round_q6(real v);
    return $rtoi(v * 64.0 + (v >= 0 ? 0.5 : -0.5));
  endfunction

  function automatic real q(logic [16:0] v);
    return real'($signed(v)) / (2.0 ** 15);
  endfunction

  function automatic int s8(logic [7:0] v);
    return int'($signed(v));
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real th, c, s;
    int steps, pos, neg;
    pos = 0; neg = 0;
    {angle_load, ln, load, rot_pos, oe} = '0;
    clear = 1;
    @(posedge clk); #1;
    for (int a = 0; a < 256; a++) begin
      angle = 8'(a); angle_load = 1; clear = 1; oe = 0;
      @(posedge clk); #1;
      angle_load = 0; clear = 0; angle = 8'($urandom);  // captured: the pin may change
      ln = 1; load = 1;
      @(posedge clk); #1;
      ln = 0; load = 0; steps = 0;
      while (!neq0 && steps < 40) begin
        rot_pos = neq1; load = 1;
        if (neq1) pos++; else neg++;
        @(posedge clk); #1;
        load = 0; steps++;
      end
      oe = 1; #1;
      th = 2.0 * PI * a / 256.0;
      c = $cos(th); s = $sin(th);
      checks += 5;
      if (steps != N) begin failures++; $display("FAIL angle %0d: %0d steps", a, steps); end
      if (absr(q(dut.x_q) - c) > 2.0 ** (-12) || absr(q(dut.y_q) - s) > 2.0 ** (-12)) begin
        failures++; $display("FAIL angle %0d: x=%f y=%f expected %f %f", a, q(dut.x_q), q(dut.y_q), c, s);
      end
      if (absr(real'(s8(cosout) - round_q6(c))) > 1.0) begin
        failures++; $display("FAIL angle %0d: cosout=%0d expected %0d", a, s8(cosout), round_q6(c));
      end
      if (absr(real'(s8(sinout) - round_q6(s))) > 1.0) begin
        failures++; $display("FAIL angle %0d: sinout=%0d expected %0d", a, s8(sinout), round_q6(s));
      end
      if (absr(real'($signed(dut.z_q))) > 2.0 ** 18) begin
        failures++; $display("FAIL angle %0d: residual z=%0d", a, $signed(dut.z_q));
      end
    end
    checks++;
    if (pos == 0 || neg == 0) begin failures++; $display("FAIL both rotation directions not used"); end
    $display("INFO steps with d=+1: %0d, d=-1: %0d", pos, neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
