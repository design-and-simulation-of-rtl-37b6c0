// tb_comparator -- unsigned and signed instances, random and corner operands,
// eq / gt compared with integer comparisons done in the bench.
module tb_comparator;
  logic [7:0] a, b;
  logic       eq_u, gt_u, eq_s, gt_s;
  int checks = 0, failures = 0;

  comparator #(.WIDTH(8), .SIGNED(1'b0)) dut_u (.a, .b, .eq(eq_u), .gt(gt_u));
  comparator #(.WIDTH(8), .SIGNED(1'b1)) dut_s (.a, .b, .eq(eq_s), .gt(gt_s));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ua, ub, sa, sb;
    for (int n = 0; n < 600; n++) begin
      a = 8'($urandom); b = 8'($urandom);
      if (n % 5 == 0) b = a;
      if (n == 1) begin a = 8'h80; b = 8'h7F; end
      #1;
      ua = int'(a); ub = int'(b);
      sa = (ua > 127) ? ua - 256 : ua;
      sb = (ub > 127) ? ub - 256 : ub;
      checks += 4;
      if (eq_u !== (ua == ub)) failures++;
      if (gt_u !== (ua > ub))  failures++;
      if (eq_s !== (sa == sb)) failures++;
      if (gt_s !== (sa > sb)) begin
        failures++;
        $display("FAIL signed a=%0d b=%0d gt=%0b", sa, sb, gt_s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
