// nmc_pkg: types shared by every near-memory-computing macro and by the
// memory subsystem that hosts them.
//
// All macros expose the same memory-like slave port as a conventional SRAM
// bank: a request (req, we, be, addr, wdata) answered by a grant in the same
// cycle and by read data one cycle later (rvalid). The handshake is this
// design's choice: the source only asks for an "SRAM-compatible interface".
// Addresses on the port are byte addresses relative to the macro's base.
package nmc_pkg;

  localparam int unsigned DATA_W = 32;
  localparam int unsigned BE_W   = DATA_W / 8;

  // Request from the host bus to one bank.
  typedef struct packed {
    logic              req;
    logic              we;
    logic [BE_W-1:0]   be;
    logic [31:0]       addr;   // byte address, relative to the bank base
    logic [DATA_W-1:0] wdata;
  } mem_req_t;

  // Response from a bank.
  typedef struct packed {
    logic              gnt;
    logic              rvalid;
    logic [DATA_W-1:0] rdata;
  } mem_rsp_t;

  // Element width of packed-SIMD operations (8, 16 or 32 bits).
  typedef enum logic [1:0] {
    SEW8  = 2'd0,
    SEW16 = 2'd1,
    SEW32 = 2'd2
  } sew_e;

endpackage
