// nmc_mem_subsystem: memory subsystem of a microcontroller in which two of
// the SRAM banks are replaced by near-memory computing macros.
//
// One slave port from the system bus reaches three 32 KiB banks: a
// conventional SRAM bank at offset 0x0_0000, NM-Caesar at 0x0_8000 and
// NM-Carus at 0x1_0000 (address bits 16:15 select the bank; this map is an
// example, the integration model only requires each macro to sit in the
// memory map like any other bank). Each macro has its own imc pin, which in
// the host comes from a software-controlled configuration register; the
// NM-Carus completion interrupt goes to the host CPU. The NM-Carus eCPU
// core is outside this RTL and connects through the ecpu_*/x_* ports.
// Timing of the port: grant in the request cycle (low only while NM-Caesar
// is busy with an instruction), read data one cycle after the grant.
//
// Lint note: rst_ni is reported as both synchronous and asynchronous only because the
// bus assertion below uses it in 'disable iff'; the flops use it asynchronously.
module nmc_mem_subsystem
  import nmc_pkg::*;
#(
  parameter int unsigned SRAM_WORDS        = 8192,   // 32 KiB
  parameter int unsigned CAESAR_BANK_WORDS = 4096,   // 2 x 16 KiB
  parameter int unsigned CARUS_LANES       = 4,
  parameter int unsigned CARUS_BANK_WORDS  = 2048,   // 4 x 8 KiB
  parameter int unsigned CARUS_EMEM_WORDS  = 128     // 512 B
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  mem_req_t    bus_req_i,
  output mem_rsp_t    bus_rsp_o,
  input  logic        caesar_imc_i,
  input  logic        carus_imc_i,
  output logic        carus_irq_o,
  output logic        caesar_busy_o,
  // NM-Carus eCPU
  output logic        ecpu_fetch_enable_o,
  input  mem_req_t    ecpu_req_i,
  output mem_rsp_t    ecpu_rsp_o,
  input  logic        x_valid_i,
  output logic        x_ready_o,
  input  logic [31:0] x_instr_i,
  input  logic [31:0] x_rs1_i,
  input  logic [31:0] x_rs2_i,
  output logic        x_accept_o,
  output logic        x_result_valid_o,
  output logic [4:0]  x_result_rd_o,
  output logic [31:0] x_result_data_o,
  output logic        carus_vpu_busy_o
);

  logic [1:0] sel;
  assign sel = bus_req_i.addr[16:15];

  mem_req_t req [3];
  mem_rsp_t rsp [3];
  always_comb begin
    for (int b = 0; b < 3; b++) begin
      req[b]      = bus_req_i;
      req[b].req  = bus_req_i.req && (sel == 2'(b));
      req[b].addr = {17'd0, bus_req_i.addr[14:0]};
    end
  end

  // conventional SRAM bank
  logic        s_rv_q;
  logic [31:0] s_rdata;
  nmc_sram #(.WORDS(SRAM_WORDS)) u_sram (
    .clk_i,
    .req_i   (req[0].req),
    .we_i    (req[0].we),
    .be_i    (req[0].be),
    .addr_i  (req[0].addr[$clog2(SRAM_WORDS)+1:2]),
    .wdata_i (req[0].wdata),
    .rdata_o (s_rdata)
  );
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) s_rv_q <= 1'b0;
    else         s_rv_q <= req[0].req && !req[0].we;
  end
  assign rsp[0].gnt    = req[0].req;
  assign rsp[0].rvalid = s_rv_q;
  assign rsp[0].rdata  = s_rdata;

  nm_caesar #(.BANK_WORDS(CAESAR_BANK_WORDS)) u_caesar (
    .clk_i, .rst_ni,
    .imc_i     (caesar_imc_i),
    .bus_req_i (req[1]),
    .bus_rsp_o (rsp[1]),
    .busy_o    (caesar_busy_o)
  );

  nm_carus #(
    .NLANES     (CARUS_LANES),
    .BANK_WORDS (CARUS_BANK_WORDS),
    .EMEM_WORDS (CARUS_EMEM_WORDS)
  ) u_carus (
    .clk_i, .rst_ni,
    .imc_i      (carus_imc_i),
    .bus_req_i  (req[2]),
    .bus_rsp_o  (rsp[2]),
    .irq_o      (carus_irq_o),
    .ecpu_fetch_enable_o,
    .ecpu_req_i,
    .ecpu_rsp_o,
    .x_valid_i, .x_ready_o, .x_instr_i, .x_rs1_i, .x_rs2_i, .x_accept_o,
    .x_result_valid_o, .x_result_rd_o, .x_result_data_o,
    .vpu_busy_o (carus_vpu_busy_o)
  );

  // response mux: reads answer one cycle after the grant
  logic [1:0] rsel_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)            rsel_q <= '0;
    else if (bus_req_i.req) rsel_q <= sel;
  end

  always_comb begin
    bus_rsp_o.gnt    = (sel < 2'd3) ? rsp[sel].gnt : bus_req_i.req;
    bus_rsp_o.rvalid = (rsel_q < 2'd3) ? rsp[rsel_q].rvalid : 1'b0;
    bus_rsp_o.rdata  = (rsel_q < 2'd3) ? rsp[rsel_q].rdata : '0;
  end

endmodule
