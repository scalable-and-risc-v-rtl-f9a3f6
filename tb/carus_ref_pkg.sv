// carus_ref_pkg: reference model of the xvnmc vector instructions and
// encoders for them, used by the NM-Carus testbenches. The model keeps the
// vector register file as a flat byte array, register r at bytes
// r*VLEN .. r*VLEN+VLEN-1 (the host view), and applies one instruction at a
// time element by element.
package carus_ref_pkg;
  import nmc_pkg::*;
  import carus_pkg::*;

  localparam int unsigned VLEN = 1024;     // bytes per vector register
  localparam int unsigned NREG = 32;

  // ------------------------------------------------------------ encoders
  function automatic logic [31:0] enc(funct6_e f6, bit ind, logic [4:0] vs2,
                                      logic [4:0] vs1, funct3_e f3, logic [4:0] vd);
    return {f6, ind, vs2, vs1, f3, vd, OPC_XVNMC};
  endfunction
  function automatic logic [31:0] enc_vsetvli(logic [4:0] rd, logic [4:0] rs1, sew_e s);
    return {1'b0, 11'({3'b000, s == SEW8 ? 3'b000 : s == SEW16 ? 3'b001 : 3'b010, 3'b000}),
            rs1, F3_OPCFG, rd, OPC_XVNMC};
  endfunction

  // ------------------------------------------------------------ model
  class vrf_model;
    logic [7:0] mem [NREG*VLEN];
    sew_e        sew = SEW32;
    int unsigned vl  = 0;

    function int unsigned sb();
      return (sew == SEW8) ? 1 : (sew == SEW16) ? 2 : 4;
    endfunction
    function int unsigned vlmax();
      return VLEN / sb();
    endfunction
    function logic [31:0] get(int unsigned r, int unsigned i);
      logic [31:0] v = 0;
      for (int unsigned b = 0; b < sb(); b++) v |= 32'(mem[r*VLEN + i*sb() + b]) << (8*b);
      return v;
    endfunction
    function void put(int unsigned r, int unsigned i, logic [31:0] v);
      for (int unsigned b = 0; b < sb(); b++) mem[r*VLEN + i*sb() + b] = v[8*b +: 8];
    endfunction
    function logic [31:0] word(int unsigned w);
      return {mem[4*w+3], mem[4*w+2], mem[4*w+1], mem[4*w]};
    endfunction
    function void set_word(int unsigned w, logic [31:0] v);
      for (int b = 0; b < 4; b++) mem[4*w+b] = v[8*b +: 8];
    endfunction

    function int unsigned setvl(int unsigned avl, sew_e s);
      sew = s;
      vl  = (avl < vlmax()) ? avl : vlmax();
      return vl;
    endfunction

    function longint sx(logic [31:0] v);
      int unsigned w = 8 * sb();
      longint unsigned u = longint'(v) & ((longint'(1) << w) - 1);
      if (u[w-1]) return longint'(u) - (longint'(1) << w);
      return longint'(u);
    endfunction

    // element-wise operation, b = vs1 element or scalar
    function logic [31:0] alu(vop_e op, logic [31:0] a, logic [31:0] b, logic [31:0] c);
      int unsigned w = 8 * sb();
      longint unsigned m = (longint'(1) << w) - 1;
      longint unsigned ua = a & m, ub = b & m, r;
      int unsigned sh = ub % w;
      case (op)
        V_ADD:  r = ua + ub;
        V_SUB:  r = ua - ub;
        V_MUL:  r = ua * ub;
        V_MACC: r = (c & m) + ua * ub;
        V_AND:  r = ua & ub;
        V_OR:   r = ua | ub;
        V_XOR:  r = ua ^ ub;
        V_MIN:  r = (sx(a) < sx(b)) ? ua : ub;
        V_MAX:  r = (sx(a) > sx(b)) ? ua : ub;
        V_MINU: r = (ua < ub) ? ua : ub;
        V_MAXU: r = (ua > ub) ? ua : ub;
        V_SLL:  r = ua << sh;
        V_SRL:  r = ua >> sh;
        V_SRA:  r = longint'(sx(a) >>> sh);
        default: r = ub;
      endcase
      return 32'(r & m);
    endfunction

    // arithmetic and vmv: vd, vs2, vs1 register numbers; vv selects vs1
    function void arith(vop_e op, int unsigned vd, int unsigned vs2, int unsigned vs1,
                        bit vv, logic [31:0] scalar);
      for (int unsigned i = 0; i < vl; i++) begin
        logic [31:0] b = vv ? get(vs1, i) : scalar;
        put(vd, i, alu(op, get(vs2, i), b, get(vd, i)));
      end
    endfunction

    function void slide(vop_e op, int unsigned vd, int unsigned vs2, logic [31:0] s);
      logic [31:0] src [];
      src = new[vlmax()];
      for (int unsigned i = 0; i < vlmax(); i++) src[i] = get(vs2, i);
      for (int unsigned i = 0; i < vl; i++) begin
        case (op)
          V_SLIDEUP:  if (i >= s) put(vd, i, src[i - s]);
          V_SLIDEDN:  put(vd, i, (i + s < vlmax()) ? src[i + s] : 0);
          V_SLIDE1UP: put(vd, i, (i == 0) ? s : src[i - 1]);
          V_SLIDE1DN: put(vd, i, (i == vl - 1) ? s : src[i + 1]);
          default: ;
        endcase
      end
    endfunction
  endclass
endpackage
