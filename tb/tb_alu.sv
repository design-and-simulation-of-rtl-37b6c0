// tb_alu -- every select code with random operands; the expected result is
// computed in the bench with integer arithmetic modulo 256.
module tb_alu;
  import cordic_pkg::*;
  alu_op_e    op;
  logic [7:0] a, b, y;
  int checks = 0, failures = 0;

  alu dut (.op, .a, .b, .y);

  function automatic int expect_of(int code, int av, int bv);
    case (code)
      0: return av;
      1: return av & bv;
      2: return av | bv;
      3: return 255 - av;
      4: return (av + bv) % 256;
      5: return (av - bv + 256) % 256;
      6: return (av + 1) % 256;
      default: return (av + 255) % 256;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int code = 0; code < 8; code++)
      for (int n = 0; n < 100; n++) begin
        op = alu_op_e'(code); a = 8'($urandom); b = 8'($urandom);
        if (n == 0) begin a = 8'h00; b = 8'hFF; end
        #1;
        checks++;
        if (int'(y) != expect_of(code, int'(a), int'(b))) begin
          failures++;
          $display("FAIL op=%03b a=%h b=%h y=%h", code[2:0], a, b, y);
        end
      end
    // the processor's subtraction: 3 - 2 and 2 - 3
    op = ALU_SUB; a = 8'd3; b = 8'd2; #1;
    checks++; if (y !== 8'd1) failures++;
    a = 8'd2; b = 8'd3; #1;
    checks++; if (y !== 8'hFF) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
