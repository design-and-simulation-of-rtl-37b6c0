// tb_atan_rom -- every table entry, at 32 and at 16 angle bits, against
// atan(2^-i) / (2*pi) * 2^Z_W computed with real arithmetic in the bench
// (within one unit of the last place).
module tb_atan_rom;
  localparam real PI = 3.14159265358979323846;
  logic [4:0]  idx;
  logic [31:0] a32;
  logic [15:0] a16;
  int checks = 0, failures = 0;

  function automatic real absr(real v);
    return v < 0.0 ? -v : v;
  endfunction

  atan_rom #(.Z_W(32), .IDX_W(5)) dut32 (.idx, .atan_o(a32));
  atan_rom #(.Z_W(16), .IDX_W(5)) dut16 (.idx, .atan_o(a16));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real e32, e16;
    for (int i = 0; i < 32; i++) begin
      idx = 5'(i);
      #1;
      e32 = $atan(2.0 ** (-i)) / (2.0 * PI) * (2.0 ** 32);
      e16 = $atan(2.0 ** (-i)) / (2.0 * PI) * (2.0 ** 16);
      checks += 2;
      if (absr(real'(a32) - e32) > 1.0) begin
        failures++; $display("FAIL i=%0d a32=%0d expected %f", i, a32, e32);
      end
      if (absr(real'(a16) - e16) > 1.0) begin
        failures++; $display("FAIL i=%0d a16=%0d expected %f", i, a16, e16);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
