// cordic_datapath -- rotation-mode CORDIC datapath for sine and cosine.
//
// Registers x, y (XY_W bits, two's complement, 2 integer bits: 1.0 is
// 2^(XY_W-2)) and z (Z_W-bit binary angle, a full turn is 2^Z_W) each sit
// behind an input multiplexer choosing the start value (ln = 1) or the ALU
// result. One step, with i the iteration counter and d = +1 (rot_pos) or -1:
//     x <= x - d * (y >>> i)
//     y <= y + d * (x >>> i)
//     z <= z - d * atan(2^-i)
// computed by three ALUs on add / subtract, plus a fourth ALU that increments
// the counter. The start vector is x0 = K(ITERATIONS) = 1/A_n, y0 = 0, so x
// and y end at cos and sin of the angle without further scaling. The 8-bit
// input angle is a binary angle (256 units per turn). Angles whose two top
// bits differ (second and third quadrant) are first turned by pi: the
// angle's top bit is flipped and x0 is negated, so the iterations only ever
// see |z| <= pi/2. Status: neq0 = (counter == ITERATIONS), neq1 = (z >= 0),
// both from comparators. cosout and sinout are x and y rounded to signed
// Q1.6 (64 = 1.0) and saturated, driven through tristate buffers enabled by
// oe. All registers load on the rising clock edge; clear zeroes them.
module cordic_datapath
  import cordic_pkg::*;
#(
  parameter int unsigned IO_W       = 8,
  parameter int unsigned XY_W       = 17,
  parameter int unsigned Z_W        = 32,
  parameter int unsigned ITERATIONS = 16
) (
  input  logic            clk,
  input  logic [IO_W-1:0] angle,
  input  logic            angle_load,
  input  logic            ln,
  input  logic            load,
  input  logic            clear,
  input  logic            rot_pos,
  input  logic            oe,
  output logic            neq0,
  output logic            neq1,
  output tri   [IO_W-1:0] cosout,
  output tri   [IO_W-1:0] sinout
);
  localparam int unsigned IDX_W = $clog2(ITERATIONS + 1) < 1 ? 1 : $clog2(ITERATIONS + 1);
  localparam int unsigned FRAC  = XY_W - 2;          // fraction bits of x and y
  localparam int unsigned OFRAC = IO_W - 2;          // fraction bits of the outputs
  localparam int unsigned SH    = FRAC - OFRAC;      // output rounding shift
  localparam logic [XY_W-1:0] K0 =
      XY_W'((64'(gain32(ITERATIONS)) + (64'd1 << (32 - FRAC - 1))) >> (32 - FRAC));

  // ---- captured input angle and quadrant reduction (rotation by pi) ----
  logic [IO_W-1:0] angle_q;
  register_unit #(.WIDTH(IO_W)) u_reg_angle (
    .clk, .clear(1'b0), .load(angle_load), .d(angle), .q(angle_q)
  );

  logic            flip;
  logic [XY_W-1:0] x_init, y_init;
  logic [Z_W-1:0]  z_init;
  always_comb begin
    flip   = angle_q[IO_W-1] ^ angle_q[IO_W-2];
    x_init = flip ? (~K0 + XY_W'(1)) : K0;
    y_init = '0;
    z_init = {angle_q[IO_W-1] ^ flip, angle_q[IO_W-2:0], {(Z_W-IO_W){1'b0}}};
  end

  // ---- registers ----
  logic [XY_W-1:0]  x_q, y_q, x_d, y_d, x_alu, y_alu, x_sh, y_sh;
  logic [Z_W-1:0]   z_q, z_d, z_alu, atan_i;
  logic [IDX_W-1:0] i_q, i_alu;

  mux2 #(.WIDTH(XY_W)) u_mux_x (.sel(ln), .d1(x_init), .d0(x_alu), .y(x_d));
  mux2 #(.WIDTH(XY_W)) u_mux_y (.sel(ln), .d1(y_init), .d0(y_alu), .y(y_d));
  mux2 #(.WIDTH(Z_W))  u_mux_z (.sel(ln), .d1(z_init), .d0(z_alu), .y(z_d));

  register_unit #(.WIDTH(XY_W)) u_reg_x (.clk, .clear, .load, .d(x_d), .q(x_q));
  register_unit #(.WIDTH(XY_W)) u_reg_y (.clk, .clear, .load, .d(y_d), .q(y_q));
  register_unit #(.WIDTH(Z_W))  u_reg_z (.clk, .clear, .load, .d(z_d), .q(z_q));
  // the counter restarts in S0 (ln) as well as on clear
  register_unit #(.WIDTH(IDX_W)) u_reg_i (
    .clk, .clear(clear | ln), .load(load), .d(i_alu), .q(i_q)
  );

  // ---- shift-add step ----
  always_comb begin
    x_sh = XY_W'($signed(x_q) >>> i_q);
    y_sh = XY_W'($signed(y_q) >>> i_q);
  end

  atan_rom #(.Z_W(Z_W), .IDX_W(IDX_W)) u_rom (.idx(i_q), .atan_o(atan_i));

  alu_op_e op_xz, op_y;
  assign op_xz = rot_pos ? ALU_SUB : ALU_ADD;
  assign op_y  = rot_pos ? ALU_ADD : ALU_SUB;

  alu #(.WIDTH(XY_W))  u_alu_x (.op(op_xz),   .a(x_q), .b(y_sh),   .y(x_alu));
  alu #(.WIDTH(XY_W))  u_alu_y (.op(op_y),    .a(y_q), .b(x_sh),   .y(y_alu));
  alu #(.WIDTH(Z_W))   u_alu_z (.op(op_xz),   .a(z_q), .b(atan_i), .y(z_alu));
  alu #(.WIDTH(IDX_W)) u_alu_i (.op(ALU_INC), .a(i_q), .b('0),     .y(i_alu));

  // ---- status ----
  logic z_eq0, z_gt0, i_gt_unused;
  comparator #(.WIDTH(IDX_W), .SIGNED(1'b0)) u_cmp_i (
    .a(i_q), .b(IDX_W'(ITERATIONS)), .eq(neq0), .gt(i_gt_unused)
  );
  comparator #(.WIDTH(Z_W), .SIGNED(1'b1)) u_cmp_z (
    .a(z_q), .b('0), .eq(z_eq0), .gt(z_gt0)
  );
  assign neq1 = z_eq0 | z_gt0;

  // ---- output rounding to Q1.6 and saturation ----
  function automatic logic [IO_W-1:0] to_out(input logic [XY_W-1:0] v);
    logic signed [XY_W:0] r;
    r = ($signed({v[XY_W-1], v}) + $signed((XY_W+1)'(1) <<< (SH - 1))) >>> SH;
    if (r > $signed((XY_W+1)'(2 ** (IO_W - 1) - 1)))  return {1'b0, {(IO_W-1){1'b1}}};
    if (r < -$signed((XY_W+1)'(2 ** (IO_W - 1))))     return {1'b1, {(IO_W-1){1'b0}}};
    return IO_W'(r);
  endfunction

  logic [IO_W-1:0] cos_r, sin_r;
  assign cos_r = to_out(x_q);
  assign sin_r = to_out(y_q);

  tristate_buffer #(.WIDTH(IO_W)) u_tri_cos (.oe, .a(cos_r), .y(cosout));
  tristate_buffer #(.WIDTH(IO_W)) u_tri_sin (.oe, .a(sin_r), .y(sinout));
endmodule
