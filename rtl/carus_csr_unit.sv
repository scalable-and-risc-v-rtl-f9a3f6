// carus_csr_unit: vtype/vl state of the NM-Carus VPU.
//
// Executes the vset[i]vl[i] family as in RVV: the new element width comes
// from vtype.vsew (bits 5:3; 8, 16 or 32 bit, other encodings select 32),
// and vl = min(AVL, VLMAX) with VLMAX = vector register length / SEW. AVL
// is rs1, the 5-bit immediate of vsetivli, VLMAX when rs1 = x0 and rd != x0,
// or the current vl when both are x0. LMUL is not supported (the source
// lists no register grouping) and is ignored. The update happens in the
// cycle exec_i is high; vl_o/sew_o show the state used by the next vector
// instruction and res_o the new vl returned to the eCPU.
//
// Lint note: the unit receives the whole decoded instruction but reads only its
// vset fields; lint lists the other fields as unused.
module carus_csr_unit
  import nmc_pkg::*;
  import carus_pkg::*;
#(
  parameter int unsigned VLEN_BYTES = 1024     // one vector register
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        exec_i,
  input  vinstr_t     instr_i,
  output logic [31:0] res_o,
  output logic [31:0] vl_o,
  output sew_e        sew_o
);

  sew_e        new_sew;
  logic [31:0] vlmax, new_vl;

  always_comb begin
    unique case (instr_i.vtype[5:3])
      3'b000:  new_sew = SEW8;
      3'b001:  new_sew = SEW16;
      default: new_sew = SEW32;
    endcase
    unique case (new_sew)
      SEW8:    vlmax = VLEN_BYTES;
      SEW16:   vlmax = VLEN_BYTES / 2;
      default: vlmax = VLEN_BYTES / 4;
    endcase
    if (instr_i.avl_max)      new_vl = vlmax;
    else if (instr_i.keep_vl) new_vl = (vl_o < vlmax) ? vl_o : vlmax;
    else                      new_vl = (instr_i.avl < vlmax) ? instr_i.avl : vlmax;
  end

  assign res_o = new_vl;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vl_o  <= '0;
      sew_o <= SEW32;
    end else if (exec_i) begin
      vl_o  <= new_vl;
      sew_o <= new_sew;
    end
  end

endmodule
