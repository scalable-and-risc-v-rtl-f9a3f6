// carus_ctrl_bus: single-channel bus of the NM-Carus controller.
//
// Two masters, the host (through the macro's port in configuration mode) and
// the eCPU, share one channel to two slaves: the code memory (eMEM) and the
// configuration register. Address bit 12 of the byte address selects the
// slave (0: eMEM, 1: configuration register); the map and the fixed
// priority of the host over the eCPU are this design's choices, the source
// only says that all controller parts sit on one bus exposed to the host.
// A granted read returns data one cycle later to the master that issued it.
module carus_ctrl_bus
  import nmc_pkg::*;
#(
  parameter int unsigned EMEM_WORDS = 128
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t host_req_i,
  output mem_rsp_t host_rsp_o,
  input  mem_req_t ecpu_req_i,
  output mem_rsp_t ecpu_rsp_o,
  // code memory
  output logic                          emem_req_o,
  output logic                          emem_we_o,
  output logic [3:0]                    emem_be_o,
  output logic [$clog2(EMEM_WORDS)-1:0] emem_addr_o,
  output logic [31:0]                   emem_wdata_o,
  input  logic [31:0]                   emem_rdata_i,
  // configuration register
  output logic                          cfg_req_o,
  output logic                          cfg_we_o,
  output logic [3:0]                    cfg_be_o,
  output logic [31:0]                   cfg_wdata_o,
  input  logic [31:0]                   cfg_rdata_i
);

  localparam int unsigned AW = $clog2(EMEM_WORDS);

  logic     sel_host;
  mem_req_t m;
  assign sel_host = host_req_i.req;
  assign m        = sel_host ? host_req_i : ecpu_req_i;

  assign emem_req_o   = m.req && !m.addr[12];
  assign emem_we_o    = m.we;
  assign emem_be_o    = m.be;
  assign emem_addr_o  = m.addr[AW+1:2];
  assign emem_wdata_o = m.wdata;
  assign cfg_req_o    = m.req && m.addr[12];
  assign cfg_we_o     = m.we;
  assign cfg_be_o     = m.be;
  assign cfg_wdata_o  = m.wdata;

  logic rv_host_q, rv_ecpu_q, rsel_cfg_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rv_host_q  <= 1'b0;
      rv_ecpu_q  <= 1'b0;
      rsel_cfg_q <= 1'b0;
    end else begin
      rv_host_q <= host_req_i.req && !host_req_i.we;
      rv_ecpu_q <= !sel_host && ecpu_req_i.req && !ecpu_req_i.we;
      if (m.req) rsel_cfg_q <= m.addr[12];
    end
  end

  logic [31:0] rdata;
  assign rdata = rsel_cfg_q ? cfg_rdata_i : emem_rdata_i;

  assign host_rsp_o.gnt    = host_req_i.req;
  assign host_rsp_o.rvalid = rv_host_q;
  assign host_rsp_o.rdata  = rdata;
  assign ecpu_rsp_o.gnt    = ecpu_req_i.req && !sel_host;
  assign ecpu_rsp_o.rvalid = rv_ecpu_q;
  assign ecpu_rsp_o.rdata  = rdata;

endmodule
