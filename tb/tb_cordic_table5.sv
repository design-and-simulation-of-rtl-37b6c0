// tb_cordic_table5 -- the angle / rotation-count sweep of the evaluation:
// angles 0, pi/6, 1 rad and pi, each with 5, 10, 15 and 20 rotations.
// Four copies of the chip differ only in ITERATIONS; a fifth runs 20
// rotations with 26-bit x and y (24 fraction bits) to show the error floor
// set by the register width. An angle enters as the nearest 8-bit binary
// angle (0, 21, 41 and 128 of 256 per turn), so the reference is sin / cos
// of that quantized angle. The full-precision x and y registers are read
// when ready rises and must lie within atan(2^-(N-1)) + (N+4) * 2^-F
// (F fraction bits) of the reference, the bound of an N-step rotation with
// truncating shifts; the 8-bit outputs must be within one Q1.6 step plus
// that bound. Latency 2N + 3 is checked for each copy. The errors are
// printed per angle and rotation count.
module tb_cordic_table5;
  localparam real PI = 3.14159265358979323846;
  localparam int  NC = 5;
  localparam int  ITS[NC] = '{5, 10, 15, 20, 20};
  localparam int  FB[NC]  = '{15, 15, 15, 15, 24};   // fraction bits of x and y

  logic       clk = 0, rstn, angle_valid;
  logic [7:0] angle;
  logic [7:0] dp_zero = 8'd0;
  logic [NC-1:0] ready, dp_done;
  tri   [7:0] c0, c1, c2, c3, c4, s0, s1, s2, s3, s4, o0, o1, o2, o3, o4;
  logic [7:0] cosout [NC];
  logic [7:0] sinout [NC];
  real xr [NC];
  real yr [NC];
  int checks = 0, failures = 0;

  cordic #(.ITERATIONS(5))  dut0 (.clk, .rstn, .angle, .angle_valid, .cosout(c0), .sinout(s0),
    .ready(ready[0]), .dp_input_x(dp_zero), .dp_input_y(dp_zero), .dp_output(o0), .dp_done(dp_done[0]));
  cordic #(.ITERATIONS(10)) dut1 (.clk, .rstn, .angle, .angle_valid, .cosout(c1), .sinout(s1),
    .ready(ready[1]), .dp_input_x(dp_zero), .dp_input_y(dp_zero), .dp_output(o1), .dp_done(dp_done[1]));
  cordic #(.ITERATIONS(15)) dut2 (.clk, .rstn, .angle, .angle_valid, .cosout(c2), .sinout(s2),
    .ready(ready[2]), .dp_input_x(dp_zero), .dp_input_y(dp_zero), .dp_output(o2), .dp_done(dp_done[2]));
  cordic #(.ITERATIONS(20)) dut3 (.clk, .rstn, .angle, .angle_valid, .cosout(c3), .sinout(s3),
    .ready(ready[3]), .dp_input_x(dp_zero), .dp_input_y(dp_zero), .dp_output(o3), .dp_done(dp_done[3]));
  // the same 20 rotations with 26-bit x and y (24 fraction bits)
  cordic #(.XY_W(26), .ITERATIONS(20)) dut4 (.clk, .rstn, .angle, .angle_valid, .cosout(c4), .sinout(s4),
    .ready(ready[4]), .dp_input_x(dp_zero), .dp_input_y(dp_zero), .dp_output(o4), .dp_done(dp_done[4]));

  always_comb begin
    cosout = '{c0, c1, c2, c3, c4};
    sinout = '{s0, s1, s2, s3, s4};
    xr[0] = real'($signed(dut0.u_dp.x_q)) / 2.0 ** 15; yr[0] = real'($signed(dut0.u_dp.y_q)) / 2.0 ** 15;
    xr[1] = real'($signed(dut1.u_dp.x_q)) / 2.0 ** 15; yr[1] = real'($signed(dut1.u_dp.y_q)) / 2.0 ** 15;
    xr[2] = real'($signed(dut2.u_dp.x_q)) / 2.0 ** 15; yr[2] = real'($signed(dut2.u_dp.y_q)) / 2.0 ** 15;
    xr[3] = real'($signed(dut3.u_dp.x_q)) / 2.0 ** 15; yr[3] = real'($signed(dut3.u_dp.y_q)) / 2.0 ** 15;
    xr[4] = real'($signed(dut4.u_dp.x_q)) / 2.0 ** 24; yr[4] = real'($signed(dut4.u_dp.y_q)) / 2.0 ** 24;
  end

  always #5 clk = ~clk;

  function automatic real absr(real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic int round_q6(real v);
    return $rtoi(v * 64.0 + (v >= 0 ? 0.5 : -0.5));
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real rad [4];
    real th, c, s, xv, yv, bound;
    int  a, lat;
    bit  seen [NC];
    rad = '{0.0, 0.523599, 1.0, 3.141593};
    rstn = 0; angle_valid = 0; angle = 0;
    repeat (2) @(posedge clk);
    #1; rstn = 1;
    for (int k = 0; k < 4; k++) begin
      a = $rtoi(rad[k] / (2.0 * PI) * 256.0 + 0.5);
      th = 2.0 * PI * a / 256.0;
      c = $cos(th); s = $sin(th);
      @(posedge clk); #1;
      angle = 8'(a); angle_valid = 1;
      @(posedge clk); #1;
      angle_valid = 0;
      seen = '{default: 0};
      lat = 1;
      while (lat < 60) begin
        for (int j = 0; j < NC; j++) if (ready[j] && !seen[j]) begin
          seen[j] = 1;
          xv = xr[j];
          yv = yr[j];
          bound = $atan(2.0 ** (-(ITS[j] - 1))) + (ITS[j] + 4) * (2.0 ** (-FB[j]));
          checks += 4;
          if (lat != 2 * ITS[j] + 3) begin
            failures++; $display("FAIL N=%0d latency %0d", ITS[j], lat);
          end
          if (absr(yv - s) > bound || absr(xv - c) > bound) begin
            failures++; $display("FAIL angle %0d N=%0d x=%f y=%f bound %e", a, ITS[j], xv, yv, bound);
          end
          if (absr(real'(int'($signed(cosout[j])) - round_q6(c))) > 1.0 + 64.0 * bound) failures++;
          if (absr(real'(int'($signed(sinout[j])) - round_q6(s))) > 1.0 + 64.0 * bound) failures++;
          $display("INFO angle %8.6f (code %3d) rotations %2d x/y bits %2d  sin %11.8f err %11.4e  cos %11.8f err %11.4e  out %4d %4d",
                   rad[k], a, ITS[j], FB[j] + 2, yv, s - yv, xv, c - xv, $signed(sinout[j]), $signed(cosout[j]));
        end
        @(posedge clk); #1; lat++;
      end
      for (int j = 0; j < NC; j++) begin
        checks++;
        if (!seen[j]) begin failures++; $display("FAIL N=%0d no ready", ITS[j]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
