// tb_tristate_buffer -- two buffers drive one shared net with opposite
// enables; the net must always carry the value of the enabled buffer, which
// only works if the disabled one really lets go of the net.
module tb_tristate_buffer;
  logic       oe;
  logic [7:0] a0, a1;
  tri   [7:0] bus;
  int checks = 0, failures = 0;

  tristate_buffer dut0 (.oe(oe),  .a(a0), .y(bus));
  tristate_buffer dut1 (.oe(!oe), .a(a1), .y(bus));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) begin
      a0 = 8'($urandom); a1 = 8'($urandom); oe = 1'($urandom);
      #1;
      checks++;
      if (bus !== (oe ? a0 : a1)) begin
        failures++;
        $display("FAIL oe=%0b a0=%h a1=%h bus=%h", oe, a0, a1, bus);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
