// carus_lane_alu: packed-SIMD ALU of one NM-Carus lane.
//
// Each lane has one ALU next to its VRF bank; all lanes run the same
// operation on different words of the same vectors. Operands are one 32-bit
// word each: a = vs2 word, b = vs1 word or the splatted scalar (rs1 or
// immediate), c = old vd word (vmacc). The result is the new vd word:
// add, sub (vs2 - b), mul (low half), macc (c + a*b), and/or/xor, signed and
// unsigned min/max, sll/srl/sra (amount = b element modulo element width) and
// mv (b), on four 8-bit, two 16-bit or one 32-bit element.
//
// The datapath is written as word-wide combinational logic. The source
// builds it from a shared 16-bit partitioned adder, a 16-bit multiplier
// iterated over partial products and a serial 8-bit shifter; this design
// keeps the resulting occupancy (carus_pkg::alu_cycles) in the VPU
// schedule instead, so the lane produces results at the source's rates but
// is not resource-shared inside.
module carus_lane_alu
  import nmc_pkg::*;
  import carus_pkg::*;
(
  input  vop_e        op_i,
  input  sew_e        sew_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  input  logic [31:0] c_i,
  output logic [31:0] res_o
);

  function automatic logic [31:0] elem_op(vop_e op, logic [31:0] a, logic [31:0] b,
                                          logic [31:0] c, int unsigned w);
    logic [31:0] m, sa, sb, r;
    logic [4:0]  sh;
    m  = (w == 32) ? 32'hffff_ffff : ((32'd1 << w) - 1);
    a &= m; b &= m; c &= m;
    // sign-extended copies for signed compares and arithmetic shift
    sa = (a[w-1]) ? (a | ~m) : a;
    sb = (b[w-1]) ? (b | ~m) : b;
    sh = 5'(b & (w - 1));
    unique case (op)
      V_ADD:  r = a + b;
      V_SUB:  r = a - b;
      V_MUL:  r = a * b;
      V_MACC: r = c + a * b;
      V_AND:  r = a & b;
      V_OR:   r = a | b;
      V_XOR:  r = a ^ b;
      V_MIN:  r = ($signed(sa) < $signed(sb)) ? a : b;
      V_MAX:  r = ($signed(sa) > $signed(sb)) ? a : b;
      V_MINU: r = (a < b) ? a : b;
      V_MAXU: r = (a > b) ? a : b;
      V_SLL:  r = a << sh;
      V_SRL:  r = a >> sh;
      V_SRA:  r = 32'($signed(sa) >>> sh);
      default: r = b;                       // V_MV
    endcase
    return r & m;
  endfunction

  always_comb begin
    res_o = '0;
    unique case (sew_i)
      SEW8:  for (int k = 0; k < 4; k++)
               res_o[8*k +: 8] = elem_op(op_i, 32'(a_i[8*k +: 8]), 32'(b_i[8*k +: 8]),
                                         32'(c_i[8*k +: 8]), 8)[7:0];
      SEW16: for (int k = 0; k < 2; k++)
               res_o[16*k +: 16] = elem_op(op_i, 32'(a_i[16*k +: 16]), 32'(b_i[16*k +: 16]),
                                           32'(c_i[16*k +: 16]), 16)[15:0];
      default: res_o = elem_op(op_i, a_i, b_i, c_i, 32);
    endcase
  end

endmodule
