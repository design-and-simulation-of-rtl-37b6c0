// tb_mux2 -- self-checking test of the 2:1 multiplexer: random data, both
// select values, output compared with the selected input.
module tb_mux2;
  logic       sel;
  logic [7:0] d1, d0, y;
  int checks = 0, failures = 0;

  mux2 dut (.sel, .d1, .d0, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      d1 = 8'($urandom); d0 = 8'($urandom); sel = 1'($urandom);
      #1;
      checks++;
      if (y !== (sel ? d1 : d0)) begin
        failures++;
        $display("FAIL sel=%0b d1=%h d0=%h y=%h", sel, d1, d0, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
