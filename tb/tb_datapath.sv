// tb_datapath -- drives the two-register datapath by hand.
// 1) Loads 3 and 2 with the input multiplexers and shows X on the output
//    (OE = 1): the output must read 3, and the status neq0 = 0, neq1 = 1.
// 2) For random non-zero operand pairs, the bench itself plays the control
//    sequence (X <= X - Y when neq1, Y <= Y - X otherwise, until neq0) and
//    checks the status bits against its own copy of X and Y at every step
//    and the final output against gcd(X, Y).
// 3) Clear zeroes both registers.
module tb_datapath;
  import cordic_pkg::*;
  logic       clock = 0;
  logic [7:0] input_x, input_y;
  logic       in_x, in_y, xload, yload, clear, xy, oe, neq0, neq1;
  alu_op_e    alusel;
  tri   [7:0] data_out;
  int checks = 0, failures = 0;

  datapath dut (.*);

  always #5 clock = ~clock;

  function automatic int gcd(int a, int b);
    int t;
    while (b != 0) begin t = a % b; a = b; b = t; end
    return a;
  endfunction

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clock);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rx, ry, ex, ey, g;
    alusel = ALU_SUB; oe = 0; xy = 0;
    clear = 1; in_x = 1; in_y = 1; xload = 0; yload = 0;
    input_x = 8'd3; input_y = 8'd2;
    @(posedge clock); #1;
    oe = 1; #1;
    check("clear gives 0", data_out == 8'd0 && neq0 == 1'b1);
    clear = 0; xload = 1; yload = 1; xy = 1;
    @(posedge clock); #1;
    check("output 3 after loading 3,2", data_out == 8'd3);
    check("status of 3,2", neq0 == 1'b0 && neq1 == 1'b1);
    xload = 0; yload = 0;

    for (int n = 0; n < 300; n++) begin
      rx = 1 + ($urandom % 255); ry = 1 + ($urandom % 255);
      if (n < 4) begin rx = 8 << n; ry = 8 << n; end
      input_x = 8'(rx); input_y = 8'(ry);
      in_x = 1; in_y = 1; xload = 1; yload = 1; oe = 0;
      @(posedge clock); #1;
      begin
        ex = rx; ey = ry; g = gcd(rx, ry);
        in_x = 0; in_y = 0; xload = 0; yload = 0;
        forever begin
          #1;
          check("neq0", neq0 == (ex == ey));
          check("neq1", neq1 == (ex > ey));
          if (neq0) break;
          if (neq1) begin xy = 1; xload = 1; ex = ex - ey; end
          else      begin xy = 0; yload = 1; ey = ey - ex; end
          @(posedge clock); #1;
          xload = 0; yload = 0;
        end
        oe = 1; #1;
        check($sformatf("gcd(%0d,%0d)=%0d out=%0d", rx, ry, g, data_out), int'(data_out) == g);
      end
    end
    clear = 1; @(posedge clock); #1; clear = 0;
    check("clear", data_out == 8'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
