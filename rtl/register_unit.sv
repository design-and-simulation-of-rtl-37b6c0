// register_unit -- WIDTH-bit register with load and clear ("Register" boxes,
// XLoad/YLoad, Clock, Clear). On a rising clock edge clear loads zero, else
// load captures d, else q holds. Clear wins over load. Clear is synchronous:
// the state that asserts it (S5) lasts at least one clock. One clock latency.
module register_unit #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             clear,
  input  logic             load,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  always_ff @(posedge clk) begin
    if (clear)     q <= '0;
    else if (load) q <= d;
  end
endmodule
