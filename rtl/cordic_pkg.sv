// cordic_pkg -- types and constants shared by the two-register processor
// (datapath / control_unit) and the CORDIC sine/cosine engine.
//
// alu_op_e  : 3-bit ALU select (ALU2..ALU0). Only 101 (subtract) is used by the
//             paper's control word; the other seven codes are this design's
//             choice, following the common textbook general-datapath ALU.
// state_e   : the six controller states S0..S5 of the state diagram.
// atan_bam32: arctan(2^-i) as a binary angle, 2^32 units per full turn:
//             round(atan(2^-i) / (2*pi) * 2^32).
// gain32    : the CORDIC scale factor K(n) = prod_{i=0}^{n-1} 1/sqrt(1+2^-2i)
//             (the reciprocal of the gain A_n), as round(K(n) * 2^32).
//             It converges to 0.6072529350 (2608131496) from n = 17 on.
package cordic_pkg;

  typedef enum logic [2:0] {
    ALU_PASS = 3'b000,  // A
    ALU_AND  = 3'b001,  // A and B
    ALU_OR   = 3'b010,  // A or B
    ALU_NOT  = 3'b011,  // not A
    ALU_ADD  = 3'b100,  // A + B
    ALU_SUB  = 3'b101,  // A - B  (the code of Table I)
    ALU_INC  = 3'b110,  // A + 1
    ALU_DEC  = 3'b111   // A - 1
  } alu_op_e;

  typedef enum logic [2:0] {
    S0 = 3'd0,  // load the operands
    S1 = 3'd1,  // test the comparator status
    S2 = 3'd2,  // step taken when neq1 = 1
    S3 = 3'd3,  // step taken when neq1 = 0
    S4 = 3'd4,  // result out (OE, Done)
    S5 = 3'd5   // reset / clear
  } state_e;

  function automatic logic [31:0] atan_bam32(input int unsigned i);
    case (i)
      0:  return 32'd536870912;
      1:  return 32'd316933406;
      2:  return 32'd167458907;
      3:  return 32'd85004756;
      4:  return 32'd42667331;
      5:  return 32'd21354465;
      6:  return 32'd10679838;
      7:  return 32'd5340245;
      8:  return 32'd2670163;
      9:  return 32'd1335087;
      10: return 32'd667544;
      11: return 32'd333772;
      12: return 32'd166886;
      13: return 32'd83443;
      14: return 32'd41722;
      15: return 32'd20861;
      16: return 32'd10430;
      17: return 32'd5215;
      18: return 32'd2608;
      19: return 32'd1304;
      20: return 32'd652;
      21: return 32'd326;
      22: return 32'd163;
      23: return 32'd81;
      24: return 32'd41;
      25: return 32'd20;
      26: return 32'd10;
      27: return 32'd5;
      28: return 32'd3;
      29: return 32'd1;
      30: return 32'd1;
      default: return 32'd0;
    endcase
  endfunction

  function automatic logic [31:0] gain32(input int unsigned n);
    case (n)
      0:  return 32'hFFFF_FFFF;  // no rotation: K = 1 (saturated)
      1:  return 32'd3037000500;
      2:  return 32'd2716375826;
      3:  return 32'd2635271635;
      4:  return 32'd2614921743;
      5:  return 32'd2609829388;
      6:  return 32'd2608555990;
      7:  return 32'd2608237621;
      8:  return 32'd2608158028;
      9:  return 32'd2608138129;
      10: return 32'd2608133154;
      11: return 32'd2608131911;
      12: return 32'd2608131600;
      13: return 32'd2608131522;
      14: return 32'd2608131503;
      15: return 32'd2608131498;
      16: return 32'd2608131497;
      default: return 32'd2608131496;
    endcase
  endfunction

endpackage
