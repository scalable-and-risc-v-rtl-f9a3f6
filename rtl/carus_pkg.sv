// carus_pkg: xvnmc vector instruction encoding and shared types of NM-Carus.
//
// From the source: the extension lives in the RISC-V custom-2 space (major
// opcode 0x5b); vv, vx and vi variants use the standard RVV OPIVV, OPIVX
// and OPIVI layouts, emvv/emvx use OPMVX, vset[i]vl[i] use the RVV formats;
// indirect ("r") variants take the register indexes from the three low bytes
// of GPR rs2. Not given by the source and chosen here: the funct6 values
// (RVV's where they do not clash), bit 25 (RVV's vm bit, unused since there
// is no masking) as the indirect flag, and the byte order of the indexes in
// rs2: [7:0] vd, [15:8] vs1, [23:16] vs2.
package carus_pkg;
  import nmc_pkg::*;

  localparam logic [6:0] OPC_XVNMC = 7'h5b;

  typedef enum logic [2:0] {
    F3_OPIVV = 3'b000,
    F3_OPIVI = 3'b011,
    F3_OPIVX = 3'b100,
    F3_OPMVX = 3'b110,
    F3_OPCFG = 3'b111
  } funct3_e;

  typedef enum logic [5:0] {
    F6_VADD       = 6'b000000,
    F6_VSUB       = 6'b000010,
    F6_VMINU      = 6'b000100,
    F6_VMIN       = 6'b000101,
    F6_VMAXU      = 6'b000110,
    F6_VMAX       = 6'b000111,
    F6_VAND       = 6'b001001,
    F6_VOR        = 6'b001010,
    F6_VXOR       = 6'b001011,
    F6_VSLIDE1UP  = 6'b001100,
    F6_VSLIDE1DN  = 6'b001101,
    F6_VSLIDEUP   = 6'b001110,
    F6_VSLIDEDN   = 6'b001111,
    F6_EMVV       = 6'b010000,
    F6_EMVX       = 6'b010001,
    F6_VMV        = 6'b010111,
    F6_VMUL       = 6'b100100,
    F6_VSLL       = 6'b100101,
    F6_VSRL       = 6'b101000,
    F6_VSRA       = 6'b101001,
    F6_VMACC      = 6'b101101
  } funct6_e;

  typedef enum logic [4:0] {
    V_ADD, V_SUB, V_MUL, V_MACC, V_AND, V_OR, V_XOR, V_MIN, V_MINU, V_MAX, V_MAXU,
    V_SLL, V_SRL, V_SRA, V_MV, V_SLIDEUP, V_SLIDEDN, V_SLIDE1UP, V_SLIDE1DN,
    V_EMVV, V_EMVX, V_SETVL, V_ILLEGAL
  } vop_e;

  typedef enum logic [1:0] { SRC_VV, SRC_VX, SRC_VI } vsrc_e;

  // Which execution unit runs an instruction.
  typedef enum logic [1:0] { EU_ARITH, EU_MOVE, EU_CSR } eu_e;

  typedef struct packed {
    logic        valid;       // a legal xvnmc instruction
    vop_e        op;
    vsrc_e       src;
    eu_e         eu;
    logic [7:0]  vd;          // logical vector indexes (direct or indirect)
    logic [7:0]  vs1;
    logic [7:0]  vs2;
    logic [4:0]  rd;          // GPR written back (vset*, emvx)
    logic [31:0] scalar;      // rs1 value or sign-extended immediate
    logic [31:0] idx;         // element index (emvv: rs2, emvx: rs1)
    logic        wb;          // returns a value to the eCPU
    // vset*: requested AVL and vtype
    logic [31:0] avl;
    logic        avl_max;     // rs1 = x0 and rd != x0: AVL = VLMAX
    logic        keep_vl;     // rs1 = x0 and rd = x0: keep vl
    logic [10:0] vtype;
  } vinstr_t;

  // ALU occupancy in cycles per 32-bit word (per lane), from the source:
  // the 16-bit adder handles a word in two cycles, the 16-bit multiplier
  // gives four 8-bit, two 16-bit or one 32-bit product in 4, 2 or 3 cycles,
  // and vmacc runs at 1, 0.67 and 0.33 MAC/cycle for 8, 16 and 32 bits.
  // Logic and copy take one cycle and the serial 8-bit shifter one cycle per
  // byte (these two are this design's estimates).
  function automatic int unsigned alu_cycles(vop_e op, sew_e s);
    unique case (op)
      V_AND, V_OR, V_XOR, V_MV:                 return 1;
      V_ADD, V_SUB, V_MIN, V_MINU, V_MAX, V_MAXU: return 2;
      V_SLL, V_SRL, V_SRA:                      return 4;
      V_MUL:  return (s == SEW8) ? 4 : (s == SEW16) ? 2 : 3;
      V_MACC: return (s == SEW8) ? 4 : 3;
      default: return 1;
    endcase
  endfunction

endpackage
