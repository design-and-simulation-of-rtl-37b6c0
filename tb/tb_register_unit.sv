// tb_register_unit -- random clear / load / data sequences; after every clock
// edge the register is compared with a reference value kept by the bench.
module tb_register_unit;
  logic       clk = 0, clear, load;
  logic [7:0] d, q, ref_q;
  int checks = 0, failures = 0;

  register_unit dut (.clk, .clear, .load, .d, .q);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 1; load = 0; d = 0;
    @(posedge clk); #1;
    ref_q = 0;
    checks++; if (q !== 0) failures++;
    for (int n = 0; n < 500; n++) begin
      clear = ($urandom % 8) == 0;
      load  = 1'($urandom);
      d     = 8'($urandom);
      @(posedge clk); #1;
      if (clear) ref_q = 0; else if (load) ref_q = d;
      checks++;
      if (q !== ref_q) begin
        failures++;
        $display("FAIL clear=%0b load=%0b d=%h q=%h expected %h", clear, load, d, q, ref_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
