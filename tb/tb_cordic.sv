// tb_cordic -- the whole chip at its default parameters, end to end.
//
// CORDIC engine: every one of the 256 input angles is presented with a
// one-clock angle_valid pulse (and a burst with angle_valid held high), and
// the bench checks
//  - latency: ready rises 2*ITERATIONS + 3 clocks after the sampling edge,
//    and stays high for exactly one clock,
//  - cosout / sinout within one Q1.6 step of round(64*cos) / round(64*sin),
//  - the outputs are released (high impedance) whenever ready is low: a
//    bench-side buffer drives a different pattern onto the same nets then.
// It counts the mechanisms the design has: rotation by pi for second and
// third quadrant angles, steps with d = +1 and d = -1, output release, and
// back-to-back operation; any that never happened is a failure.
// Two-register processor: random non-zero operands on the dp_* pins, the
// result on dp_output at dp_done is checked against their gcd; both of its
// subtraction states (X <= X - Y and Y <= Y - X) must occur.
module tb_cordic;
  localparam real PI = 3.14159265358979323846;
  localparam int  N  = 16;             // default ITERATIONS of the top
  localparam int  LAT = 2 * N + 3;

  logic       clk = 0, rstn, angle_valid, ready, dp_done;
  logic [7:0] angle, dp_input_x, dp_input_y;
  tri   [7:0] cosout, sinout, dp_output;
  int checks = 0, failures = 0;
  int n_flip = 0, n_pos = 0, n_neg = 0, n_release = 0, n_b2b = 0, n_gcd = 0;
  int n_xsub = 0, n_ysub = 0;

  cordic dut (.*);

  // second drivers on the result nets, active only while the chip is idle
  tristate_buffer u_fill_c (.oe(!ready), .a(8'hA5), .y(cosout));
  tristate_buffer u_fill_s (.oe(!ready), .a(8'h5A), .y(sinout));

  always #5 clk = ~clk;

  function automatic real absr(real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic int round_q6(real v);
    return $rtoi(v * 64.0 + (v >= 0 ? 0.5 : -0.5));
  endfunction

  function automatic int gcd(int a, int b);
    int t;
    while (b != 0) begin t = a % b; a = b; b = t; end
    return a;
  endfunction

  // step and release counters, watched on every clock
  always @(posedge clk) if (rstn) begin
    if (dut.u_ctrl.state == cordic_pkg::S2) n_pos++;
    if (dut.u_ctrl.state == cordic_pkg::S3) n_neg++;
    if (dut.u_proc.u_cu.state == cordic_pkg::S2) n_xsub++;
    if (dut.u_proc.u_cu.state == cordic_pkg::S3) n_ysub++;
    if (!ready && cosout == 8'hA5 && sinout == 8'h5A) n_release++;
    if (!ready && (cosout != 8'hA5 || sinout != 8'h5A)) begin
      failures++; $display("FAIL outputs driven while ready is low");
    end
  end

  // one-clock ready pulse
  always @(posedge clk) if (rstn && ready) begin
    #1;
    checks++;
    if (ready) begin failures++; $display("FAIL ready longer than one clock"); end
  end

  task automatic check_result(int a);
    real th;
    int ec, es;
    th = 2.0 * PI * a / 256.0;
    ec = round_q6($cos(th)); es = round_q6($sin(th));
    checks += 2;
    if (absr(real'(int'($signed(cosout)) - ec)) > 1.0) begin
      failures++; $display("FAIL angle %0d cosout=%0d expected %0d", a, $signed(cosout), ec);
    end
    if (absr(real'(int'($signed(sinout)) - es)) > 1.0) begin
      failures++; $display("FAIL angle %0d sinout=%0d expected %0d", a, $signed(sinout), es);
    end
    if (a[7] ^ a[6]) n_flip++;
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // CORDIC engine
  initial begin
    int lat;
    rstn = 0; angle_valid = 0; angle = 0;
    repeat (3) @(posedge clk);
    #1; rstn = 1;
    for (int a = 0; a < 256; a++) begin
      // ready was seen in S4; the engine is back in S5 after the next edge
      repeat (1 + $urandom % 3) @(posedge clk);
      #1; angle = 8'(a); angle_valid = 1;
      @(posedge clk);                 // sampling edge (the engine idles in S5)
      #1; angle_valid = 0; angle = 8'($urandom);
      lat = 1;
      while (!ready && lat < 200) begin @(posedge clk); #1; lat++; end
      checks++;
      if (lat != LAT) begin failures++; $display("FAIL angle %0d latency %0d expected %0d", a, lat, LAT); end
      check_result(a);
    end
    // back to back: angle_valid held high, a new angle after every ready
    for (int k = 0; k < 8; k++) begin
      int a;
      a = 16 * k + 5;
      angle = 8'(a); angle_valid = 1;
      @(posedge clk); #1;
      while (!ready) begin @(posedge clk); #1; end
      check_result(a);
      n_b2b++;
    end
    angle_valid = 0;
    repeat (3) @(posedge clk);
    #1;
    checks += 5;
    if (n_flip == 0)    begin failures++; $display("FAIL no rotation by pi"); end
    if (n_pos == 0)     begin failures++; $display("FAIL no d=+1 step"); end
    if (n_neg == 0)     begin failures++; $display("FAIL no d=-1 step"); end
    if (n_release == 0) begin failures++; $display("FAIL outputs never released"); end
    if (n_b2b == 0)     begin failures++; $display("FAIL no back-to-back run"); end
    wait (n_gcd >= 20);
    checks += 3;
    if (n_xsub == 0) begin failures++; $display("FAIL no X <= X - Y step"); end
    if (n_ysub == 0) begin failures++; $display("FAIL no Y <= Y - X step"); end
    $display("INFO pi-rotations=%0d d+1 steps=%0d d-1 steps=%0d released-clocks=%0d back-to-back=%0d gcd-runs=%0d X-Y=%0d Y-X=%0d",
             n_flip, n_pos, n_neg, n_release, n_b2b, n_gcd, n_xsub, n_ysub);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // two-register processor on the dp_* pins (it restarts after each done)
  initial begin
    int x, y;
    dp_input_x = 8'd3; dp_input_y = 8'd2;
    @(posedge rstn);
    for (int k = 0; k < 20; k++) begin
      x = 1 + ($urandom % 255); y = 1 + ($urandom % 255);
      if (k == 0) begin x = 3; y = 2; end
      // change the operands just after a done, before the next S5 -> S0
      @(posedge clk); #1;
      while (!dp_done) begin @(posedge clk); #1; end
      dp_input_x = 8'(x); dp_input_y = 8'(y);
      @(posedge clk); #1;
      while (!dp_done) begin @(posedge clk); #1; end
      checks++;
      if (int'(dp_output) != gcd(x, y)) begin
        failures++; $display("FAIL gcd(%0d,%0d) dp_output=%0d", x, y, dp_output);
      end
      n_gcd++;
    end
  end
endmodule
