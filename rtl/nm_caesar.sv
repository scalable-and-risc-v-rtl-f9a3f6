// nm_caesar: NM-Caesar, an SRAM-compatible near-memory computing macro
// micro-controlled by its host.
//
// Two single-port SRAM banks (2 x 16 KiB by default) sit behind an
// arbiter/mux shared by the host port and the internal controller, as in the
// source's block diagram. With imc_i low the macro is a plain memory: reads
// and writes go to the addressed bank and read data comes one cycle later.
// With imc_i high every bus write is an instruction: the write data holds
// opcode and source word addresses, the bus address is the destination
// (caesar_pkg). Instructions are decoded and scheduled by caesar_ctrl and
// executed by the two-cycle SIMD ALU (caesar_alu); results land in place.
//
// Interface: nmc_pkg memory port. gnt is low while the controller's fetch
// stage is busy (computing mode) or while the controller uses the bank the
// host addresses (memory mode, e.g. right after imc_i falls with
// instructions still in flight). Reads while imc_i is high are served as
// memory reads (not specified by the source).
//
// Lint note: rst_ni is reported as both synchronous and asynchronous only because the
// bus assertion below uses it in 'disable iff'; the flops use it asynchronously.
module nm_caesar
  import nmc_pkg::*;
  import caesar_pkg::*;
#(
  parameter int unsigned BANK_WORDS = 4096      // 16 KiB per bank
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     imc_i,
  input  mem_req_t bus_req_i,
  output mem_rsp_t bus_rsp_o,
  output logic     busy_o
);

  localparam int unsigned RW = $clog2(BANK_WORDS);

  logic [WADDR_W-1:0] host_waddr;
  logic               host_bank;
  assign host_waddr = bus_req_i.addr[WADDR_W+1:2];
  assign host_bank  = host_waddr[WADDR_W-1];

  // --------------------------------------------------------- controller
  logic        instr_valid, instr_gnt;
  logic [1:0]  c_req, c_we;
  logic [RW-1:0] c_addr [2];
  logic [31:0] c_wdata;
  logic [31:0] rdata [2];
  logic        alu_valid_in, alu_valid_out;
  caesar_op_e  alu_op;
  sew_e        alu_sew;
  logic [31:0] alu_a, alu_b, alu_res;

  assign instr_valid = bus_req_i.req && bus_req_i.we && imc_i;

  caesar_ctrl #(.BANK_WORDS(BANK_WORDS)) u_ctrl (
    .clk_i, .rst_ni,
    .instr_valid_i (instr_valid),
    .instr_dst_i   (host_waddr),
    .instr_data_i  (bus_req_i.wdata),
    .instr_gnt_o   (instr_gnt),
    .bank_req_o    (c_req),
    .bank_we_o     (c_we),
    .bank_addr_o   (c_addr),
    .bank_wdata_o  (c_wdata),
    .bank_rdata_i  (rdata),
    .alu_valid_o   (alu_valid_in),
    .alu_op_o      (alu_op),
    .alu_sew_o     (alu_sew),
    .alu_a_o       (alu_a),
    .alu_b_o       (alu_b),
    .alu_valid_i   (alu_valid_out),
    .alu_result_i  (alu_res),
    .busy_o
  );

  caesar_alu u_alu (
    .clk_i, .rst_ni,
    .valid_i  (alu_valid_in),
    .op_i     (alu_op),
    .sew_i    (alu_sew),
    .a_i      (alu_a),
    .b_i      (alu_b),
    .valid_o  (alu_valid_out),
    .result_o (alu_res)
  );

  // ------------------------------------------------------ arbiter / mux
  logic host_mem;                   // host memory access this cycle
  logic host_gnt;
  assign host_mem = bus_req_i.req && !(bus_req_i.we && imc_i);
  assign host_gnt = host_mem && !c_req[host_bank];

  logic [1:0]    b_req, b_we;
  logic [3:0]    b_be [2];
  logic [RW-1:0] b_addr [2];
  logic [31:0]   b_wdata [2];

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      b_req[b]   = c_req[b];
      b_we[b]    = c_we[b];
      b_be[b]    = 4'hf;
      b_addr[b]  = c_addr[b];
      b_wdata[b] = c_wdata;
    end
    if (host_gnt) begin
      b_req[host_bank]   = 1'b1;
      b_we[host_bank]    = bus_req_i.we;
      b_be[host_bank]    = bus_req_i.be;
      b_addr[host_bank]  = host_waddr[RW-1:0];
      b_wdata[host_bank] = bus_req_i.wdata;
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_bank
    nmc_sram #(.WORDS(BANK_WORDS)) u_bank (
      .clk_i,
      .req_i   (b_req[b]),
      .we_i    (b_we[b]),
      .be_i    (b_be[b]),
      .addr_i  (b_addr[b]),
      .wdata_i (b_wdata[b]),
      .rdata_o (rdata[b])
    );
  end

  logic rvalid_q, rbank_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= 1'b0;
      rbank_q  <= 1'b0;
    end else begin
      rvalid_q <= host_gnt && !bus_req_i.we;
      if (host_gnt) rbank_q <= host_bank;
    end
  end

  assign bus_rsp_o.gnt    = host_gnt || (instr_valid && instr_gnt);
  assign bus_rsp_o.rvalid = rvalid_q;
  assign bus_rsp_o.rdata  = rdata[rbank_q];

endmodule
