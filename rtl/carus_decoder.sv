// carus_decoder: decodes one offloaded xvnmc instruction (combinational).
//
// Takes the instruction word and the two GPR values the eCPU sends with it
// (rs1, rs2) and produces a vinstr_t: operation, operand kind, vector
// register indexes, scalar operand and the unit that executes it. For
// indirect variants (bit 25 set) the vector indexes are read from rs2,
// which lets one instruction in a loop walk over many registers by adding a
// constant to rs2. Field layout follows RVV; funct6 values and the indirect
// flag are listed in carus_pkg. accept_o is low for anything that is not a
// legal xvnmc instruction, so the eCPU can raise an illegal-instruction
// exception.
module carus_decoder
  import nmc_pkg::*;
  import carus_pkg::*;
(
  input  logic [31:0] instr_i,
  input  logic [31:0] rs1_i,
  input  logic [31:0] rs2_i,
  output vinstr_t     dec_o
);

  funct6_e f6;
  funct3_e f3;
  logic    indirect;
  assign f6       = funct6_e'(instr_i[31:26]);
  assign f3       = funct3_e'(instr_i[14:12]);
  assign indirect = instr_i[25];

  always_comb begin
    dec_o         = '0;
    dec_o.op      = V_ILLEGAL;
    dec_o.src     = SRC_VV;
    dec_o.eu      = EU_ARITH;
    dec_o.rd      = instr_i[11:7];
    dec_o.vd      = {3'b0, instr_i[11:7]};
    dec_o.vs1     = {3'b0, instr_i[19:15]};
    dec_o.vs2     = {3'b0, instr_i[24:20]};
    dec_o.scalar  = rs1_i;
    dec_o.idx     = rs2_i;
    dec_o.avl     = rs1_i;
    dec_o.vtype   = instr_i[30:20];

    if (instr_i[6:0] == OPC_XVNMC) begin
      unique case (f3)
        F3_OPIVV, F3_OPIVX, F3_OPIVI: begin
          dec_o.src = (f3 == F3_OPIVV) ? SRC_VV : (f3 == F3_OPIVX) ? SRC_VX : SRC_VI;
          if (f3 == F3_OPIVI) dec_o.scalar = 32'(signed'(instr_i[19:15]));
          unique case (f6)
            F6_VADD:      dec_o.op = V_ADD;
            F6_VSUB:      dec_o.op = (f3 != F3_OPIVI) ? V_SUB : V_ILLEGAL;
            F6_VMUL:      dec_o.op = (f3 != F3_OPIVI) ? V_MUL : V_ILLEGAL;
            F6_VMACC:     dec_o.op = (f3 != F3_OPIVI) ? V_MACC : V_ILLEGAL;
            F6_VAND:      dec_o.op = V_AND;
            F6_VOR:       dec_o.op = V_OR;
            F6_VXOR:      dec_o.op = V_XOR;
            F6_VMIN:      dec_o.op = (f3 != F3_OPIVI) ? V_MIN : V_ILLEGAL;
            F6_VMINU:     dec_o.op = (f3 != F3_OPIVI) ? V_MINU : V_ILLEGAL;
            F6_VMAX:      dec_o.op = (f3 != F3_OPIVI) ? V_MAX : V_ILLEGAL;
            F6_VMAXU:     dec_o.op = (f3 != F3_OPIVI) ? V_MAXU : V_ILLEGAL;
            F6_VSLL:      dec_o.op = V_SLL;
            F6_VSRL:      dec_o.op = V_SRL;
            F6_VSRA:      dec_o.op = V_SRA;
            F6_VMV:       dec_o.op = V_MV;
            F6_VSLIDEUP:  dec_o.op = (f3 != F3_OPIVV) ? V_SLIDEUP : V_ILLEGAL;
            F6_VSLIDEDN:  dec_o.op = (f3 != F3_OPIVV) ? V_SLIDEDN : V_ILLEGAL;
            F6_VSLIDE1UP: dec_o.op = (f3 == F3_OPIVX) ? V_SLIDE1UP : V_ILLEGAL;
            F6_VSLIDE1DN: dec_o.op = (f3 == F3_OPIVX) ? V_SLIDE1DN : V_ILLEGAL;
            default:      dec_o.op = V_ILLEGAL;
          endcase
          // shift amounts of the vi forms are unsigned
          if (f3 == F3_OPIVI && dec_o.op inside {V_SLL, V_SRL, V_SRA, V_SLIDEUP, V_SLIDEDN})
            dec_o.scalar = {27'd0, instr_i[19:15]};
          if (dec_o.op inside {V_SLIDEUP, V_SLIDEDN, V_SLIDE1UP, V_SLIDE1DN})
            dec_o.eu = EU_MOVE;
          if (indirect) begin
            dec_o.vd  = rs2_i[7:0];
            dec_o.vs1 = rs2_i[15:8];
            dec_o.vs2 = rs2_i[23:16];
          end
        end
        F3_OPMVX: begin
          dec_o.src = SRC_VX;
          dec_o.eu  = EU_MOVE;
          unique case (f6)
            F6_EMVV: begin                 // vd[rs2] <- rs1
              dec_o.op  = V_EMVV;
              dec_o.idx = rs2_i;
            end
            F6_EMVX: begin                 // rd <- vs2[rs1]
              dec_o.op  = V_EMVX;
              dec_o.idx = rs1_i;
              dec_o.wb  = 1'b1;
            end
            default: dec_o.op = V_ILLEGAL;
          endcase
        end
        F3_OPCFG: begin
          dec_o.op = V_SETVL;
          dec_o.eu = EU_CSR;
          dec_o.wb = 1'b1;
          if (instr_i[31:30] == 2'b11) begin          // vsetivli
            dec_o.avl   = {27'd0, instr_i[19:15]};
            dec_o.vtype = {1'b0, instr_i[29:20]};
          end else begin
            if (instr_i[31]) dec_o.vtype = rs2_i[10:0];  // vsetvl
            dec_o.avl_max = (instr_i[19:15] == 5'd0) && (instr_i[11:7] != 5'd0);
            dec_o.keep_vl = (instr_i[19:15] == 5'd0) && (instr_i[11:7] == 5'd0);
          end
        end
        default: dec_o.op = V_ILLEGAL;
      endcase
    end
    dec_o.valid = (dec_o.op != V_ILLEGAL);
  end

endmodule
