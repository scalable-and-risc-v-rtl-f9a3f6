// caesar_ref_pkg: reference model of the NM-Caesar instruction set, used by
// the testbenches to predict results. Written element by element with plain
// integer arithmetic, independently of the partitioned datapath of the RTL.
package caesar_ref_pkg;
  import nmc_pkg::*;
  import caesar_pkg::*;

  function automatic int unsigned ew(sew_e s);
    return (s == SEW8) ? 8 : (s == SEW16) ? 16 : 32;
  endfunction

  function automatic longint sx(longint unsigned v, int unsigned w);
    longint unsigned m;
    m = (w == 64) ? '1 : ((64'd1 << w) - 1);
    v &= m;
    if (v[w-1]) return longint'(v | ~m);
    return longint'(v);
  endfunction

  // Executes one instruction; acc is the model accumulator.
  function automatic logic [31:0] exec(caesar_op_e op, sew_e s, logic [31:0] a,
                                       logic [31:0] b, ref logic [31:0] acc);
    int unsigned w, n;
    logic [31:0] r, accb;
    longint dot;
    w = ew(s);
    n = 32 / w;
    r = 0;
    accb = (op inside {OP_MAC_INIT, OP_DOT_INIT}) ? 32'd0 : acc;
    dot = 0;
    for (int unsigned i = 0; i < n; i++) begin
      longint unsigned ea, eb, ec, m;
      longint sa, sb;
      longint unsigned e;
      m  = (w == 32) ? 64'hffff_ffff : ((64'd1 << w) - 1);
      ea = (a >> (i*w)) & m;
      eb = (b >> (i*w)) & m;
      ec = (accb >> (i*w)) & m;
      sa = sx(ea, w);
      sb = sx(eb, w);
      case (op)
        OP_AND: e = ea & eb;
        OP_OR:  e = ea | eb;
        OP_XOR: e = ea ^ eb;
        OP_ADD: e = ea + eb;
        OP_SUB: e = ea - eb;
        OP_MUL: e = ea * eb;
        OP_MAC_INIT, OP_MAC, OP_MAC_STORE: e = ec + ea * eb;
        OP_SLL: e = ea << (eb % w);
        OP_SLR: e = ea >> (eb % w);
        OP_MIN: e = (sa < sb) ? ea : eb;
        OP_MAX: e = (sa > sb) ? ea : eb;
        default: e = 0;
      endcase
      r |= 32'((e & m) << (i*w));
      dot += sa * sb;
    end
    if (op inside {OP_MAC_INIT, OP_MAC, OP_MAC_STORE}) acc = r;
    if (op inside {OP_DOT_INIT, OP_DOT, OP_DOT_STORE}) begin
      r   = accb + 32'(dot);
      acc = r;
    end
    return r;
  endfunction
endpackage
