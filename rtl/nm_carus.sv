// nm_carus: NM-Carus, an SRAM-compatible near-memory computing macro with
// its own RISC-V controller and vector unit.
//
// The data memory is the vector register file: NLANES single-port banks,
// with consecutive host words placed in consecutive banks (word w in bank
// w mod NLANES, row w div NLANES), so a vector register of 1 KiB (default
// sizes) spreads evenly over all lanes. With imc_i low the host port reads
// and writes this memory like a plain SRAM. With imc_i high the port reaches
// the controller bus instead: the code memory (eMEM, 512 B) and the
// configuration register that starts a kernel and reports its end (also on
// irq_o). The kernel runs on the eCPU, which is not part of this RTL: its
// bus master port (ecpu_req_i/ecpu_rsp_o), its fetch enable and its vector
// offload port (x_*) are brought out. The eCPU offloads xvnmc vector
// instructions to carus_vpu, which computes in place on the VRF.
//
// VRF arbitration: the host has priority, so the macro keeps the timing of
// an SRAM (grant in the request cycle, data one cycle later) also while a
// kernel runs; a host access to the VRF stalls the whole VPU for that
// cycle. Read data for the VPU is held per bank until the VPU uses it. The
// fixed host priority is this design's choice.
//
// Lint note: rst_ni is reported as both synchronous and asynchronous only because the
// assertion below uses it in 'disable iff'; the flops use it asynchronously.
module nm_carus
  import nmc_pkg::*;
#(
  parameter int unsigned NLANES     = 4,
  parameter int unsigned BANK_WORDS = 2048,    // 8 KiB per bank
  parameter int unsigned EMEM_WORDS = 128      // 512 B
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        imc_i,
  input  mem_req_t    bus_req_i,
  output mem_rsp_t    bus_rsp_o,
  output logic        irq_o,
  // eCPU connections
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
  output logic        vpu_busy_o
);

  localparam int unsigned RW = $clog2(BANK_WORDS);
  localparam int unsigned LW = (NLANES > 1) ? $clog2(NLANES) : 1;
  localparam int unsigned AW = $clog2(NLANES * BANK_WORDS);

  // ------------------------------------------------------------ system mux
  logic     host_vrf_req;
  mem_req_t host_ctl;
  mem_rsp_t rsp_ctl;
  assign host_vrf_req = bus_req_i.req && !imc_i;
  always_comb begin
    host_ctl     = bus_req_i;
    host_ctl.req = bus_req_i.req && imc_i;
  end

  // ------------------------------------------------------------ controller
  logic                          emem_req, emem_we, cfg_req, cfg_we;
  logic [3:0]                    emem_be, cfg_be;
  logic [$clog2(EMEM_WORDS)-1:0] emem_addr;
  logic [31:0]                   emem_wdata, emem_rdata, cfg_wdata, cfg_rdata;

  carus_ctrl_bus #(.EMEM_WORDS(EMEM_WORDS)) u_bus (
    .clk_i, .rst_ni,
    .host_req_i   (host_ctl),
    .host_rsp_o   (rsp_ctl),
    .ecpu_req_i,
    .ecpu_rsp_o,
    .emem_req_o   (emem_req),
    .emem_we_o    (emem_we),
    .emem_be_o    (emem_be),
    .emem_addr_o  (emem_addr),
    .emem_wdata_o (emem_wdata),
    .emem_rdata_i (emem_rdata),
    .cfg_req_o    (cfg_req),
    .cfg_we_o     (cfg_we),
    .cfg_be_o     (cfg_be),
    .cfg_wdata_o  (cfg_wdata),
    .cfg_rdata_i  (cfg_rdata)
  );

  nmc_sram #(.WORDS(EMEM_WORDS)) u_emem (
    .clk_i,
    .req_i   (emem_req),
    .we_i    (emem_we),
    .be_i    (emem_be),
    .addr_i  (emem_addr),
    .wdata_i (emem_wdata),
    .rdata_o (emem_rdata)
  );

  carus_cfg_reg u_cfg (
    .clk_i, .rst_ni,
    .req_i          (cfg_req),
    .we_i           (cfg_we),
    .be_i           (cfg_be),
    .wdata_i        (cfg_wdata),
    .rdata_o        (cfg_rdata),
    .fetch_enable_o (ecpu_fetch_enable_o),
    .irq_o
  );

  // ------------------------------------------------------------------ VPU
  logic [NLANES-1:0] v_req, v_we;
  logic [3:0]        v_be    [NLANES];
  logic [RW-1:0]     v_addr  [NLANES];
  logic [31:0]       v_wdata [NLANES];
  logic [31:0]       v_rdata [NLANES];
  logic [31:0]       s_rdata [NLANES];
  logic              stall;

  assign stall = host_vrf_req;

  carus_vpu #(.NLANES(NLANES), .BANK_WORDS(BANK_WORDS)) u_vpu (
    .clk_i, .rst_ni,
    .stall_i (stall),
    .x_valid_i, .x_ready_o, .x_instr_i, .x_rs1_i, .x_rs2_i, .x_accept_o,
    .x_result_valid_o, .x_result_rd_o, .x_result_data_o,
    .vrf_req_o   (v_req),
    .vrf_we_o    (v_we),
    .vrf_be_o    (v_be),
    .vrf_addr_o  (v_addr),
    .vrf_wdata_o (v_wdata),
    .vrf_rdata_i (v_rdata),
    .busy_o      (vpu_busy_o)
  );

  // ------------------------------------------------------ VRF arbiter/mux
  logic [AW-1:0] hw;
  logic [LW-1:0] hbank;
  assign hw    = bus_req_i.addr[AW+1:2];
  assign hbank = LW'(hw % NLANES);

  logic [NLANES-1:0] v_rv_q;
  logic [31:0]       hold_q [NLANES];
  logic              h_rv_q;
  logic [LW-1:0]     h_bank_q;

  for (genvar l = 0; l < NLANES; l++) begin : g_bank
    logic          host_here;
    logic          req, we;
    logic [3:0]    be;
    logic [RW-1:0] addr;
    logic [31:0]   wdata;
    assign host_here = host_vrf_req && (hbank == LW'(l));
    assign req   = host_here || (v_req[l] && !stall);
    assign we    = host_here ? bus_req_i.we    : v_we[l];
    assign be    = host_here ? bus_req_i.be    : v_be[l];
    assign addr  = host_here ? RW'(hw / NLANES) : v_addr[l];
    assign wdata = host_here ? bus_req_i.wdata : v_wdata[l];

    nmc_sram #(.WORDS(BANK_WORDS)) u_bank (
      .clk_i,
      .req_i   (req),
      .we_i    (we),
      .be_i    (be),
      .addr_i  (addr),
      .wdata_i (wdata),
      .rdata_o (s_rdata[l])
    );

    // read data for the VPU stays valid until used
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        v_rv_q[l] <= 1'b0;
        hold_q[l] <= '0;
      end else begin
        v_rv_q[l] <= v_req[l] && !v_we[l] && !stall;
        if (v_rv_q[l]) hold_q[l] <= s_rdata[l];
      end
    end
    assign v_rdata[l] = v_rv_q[l] ? s_rdata[l] : hold_q[l];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      h_rv_q   <= 1'b0;
      h_bank_q <= '0;
    end else begin
      h_rv_q <= host_vrf_req && !bus_req_i.we;
      if (host_vrf_req) h_bank_q <= hbank;
    end
  end

  assign bus_rsp_o.gnt    = imc_i ? rsp_ctl.gnt : bus_req_i.req;
  assign bus_rsp_o.rvalid = h_rv_q || rsp_ctl.rvalid;
  assign bus_rsp_o.rdata  = h_rv_q ? s_rdata[h_bank_q] : rsp_ctl.rdata;

endmodule
