// caesar_pkg: instruction format of NM-Caesar.
//
// In computing mode every bus write is an instruction. The source fixes the
// layout: opcode in data[31:26], SRC2 word address in data[25:13], SRC1 word
// address in data[12:0], destination word address on the address bus. The
// numeric opcode values are not given by the source and are chosen here.
// CSRW carries the element width in data[1:0] (this design's choice; the
// source only says a dedicated instruction sets it).
package caesar_pkg;

  localparam int unsigned WADDR_W = 13;   // 8192 words = 32 KiB

  typedef enum logic [5:0] {
    OP_AND       = 6'd0,
    OP_OR        = 6'd1,
    OP_XOR       = 6'd2,
    OP_ADD       = 6'd3,
    OP_SUB       = 6'd4,
    OP_MUL       = 6'd5,
    OP_MAC_INIT  = 6'd6,
    OP_MAC       = 6'd7,
    OP_MAC_STORE = 6'd8,
    OP_DOT_INIT  = 6'd9,
    OP_DOT       = 6'd10,
    OP_DOT_STORE = 6'd11,
    OP_SLL       = 6'd12,
    OP_SLR       = 6'd13,
    OP_MIN       = 6'd14,
    OP_MAX       = 6'd15,
    OP_CSRW      = 6'd63
  } caesar_op_e;

  // Instructions without a destination leave memory untouched.
  function automatic logic op_writes(caesar_op_e op);
    return !(op inside {OP_MAC_INIT, OP_MAC, OP_DOT_INIT, OP_DOT, OP_CSRW});
  endfunction

endpackage
