// tb_nmc_mem_subsystem: end-to-end test of the memory subsystem with both
// near-memory macros, at the default (full) sizes.
//
// Plays the host: checks the conventional bank, fills NM-Caesar and streams
// a small kernel to it (element-wise add, multiply-accumulate and dot
// product, one same-bank instruction), fills NM-Carus, loads its code memory
// and starts a kernel that a behavioural stand-in for the eCPU executes
// (vsetvli, indirect vmacc.vx over three rows, a slide, emvv/emvx). While
// NM-Carus computes, the host works on the other banks and reads the NM-Carus
// VRF, which stalls its VPU. Everything read back is compared with the
// reference models. Each mechanism of the design is counted and must occur:
// mode switches, NM-Caesar bus stalls and same-bank slow issue, NM-Carus
// VPU stalls, indirect addressing, scalar/vector exchange and the
// completion interrupt.
module tb_nmc_mem_subsystem;
  import nmc_pkg::*;
  import caesar_pkg::*;
  import caesar_ref_pkg::*;
  import carus_pkg::*;
  import carus_ref_pkg::*;

  localparam logic [31:0] SRAM_BASE = 32'h0_0000, CAESAR_BASE = 32'h0_8000,
                          CARUS_BASE = 32'h1_0000;
  logic clk = 0, rst_n = 0, c_imc = 0, r_imc = 0;
  mem_req_t req, ecpu_req;
  mem_rsp_t rsp, ecpu_rsp;
  logic irq, c_busy, fetch_en, x_valid, x_ready, x_accept, x_rvalid, vbusy;
  logic [31:0] x_instr, x_rs1, x_rs2, x_rdata;
  logic [4:0]  x_rd;
  int checks = 0, failures = 0;
  int n_mode = 0, n_caesar_stall = 0, n_same_bank = 0, n_vpu_stall = 0, n_indirect = 0,
      n_emv = 0, n_irq = 0;

  nmc_mem_subsystem dut (
    .clk_i(clk), .rst_ni(rst_n), .bus_req_i(req), .bus_rsp_o(rsp),
    .caesar_imc_i(c_imc), .carus_imc_i(r_imc), .carus_irq_o(irq), .caesar_busy_o(c_busy),
    .ecpu_fetch_enable_o(fetch_en), .ecpu_req_i(ecpu_req), .ecpu_rsp_o(ecpu_rsp),
    .x_valid_i(x_valid), .x_ready_o(x_ready), .x_instr_i(x_instr), .x_rs1_i(x_rs1),
    .x_rs2_i(x_rs2), .x_accept_o(x_accept), .x_result_valid_o(x_rvalid),
    .x_result_rd_o(x_rd), .x_result_data_o(x_rdata), .carus_vpu_busy_o(vbusy));

  always #5 clk = ~clk;
  logic c_imc_q = 0, r_imc_q = 0, irq_q = 0;
  always @(posedge clk) begin
    if (req.req && !rsp.gnt) n_caesar_stall++;
    if (req.req && req.addr[16:15] == 2'd2 && !r_imc && vbusy) n_vpu_stall++;
    if (c_imc != c_imc_q || r_imc != r_imc_q) n_mode++;
    if (irq && !irq_q) n_irq++;
    c_imc_q <= c_imc; r_imc_q <= r_imc; irq_q <= irq;
  end

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic bus_write(logic [31:0] addr, logic [31:0] data);
    req.req = 1; req.we = 1; req.be = 4'hf; req.addr = addr; req.wdata = data;
    do @(posedge clk); while (!rsp.gnt);
    #1 req.req = 0;
  endtask
  task automatic bus_read(logic [31:0] addr, output logic [31:0] data);
    req.req = 1; req.we = 0; req.be = 4'hf; req.addr = addr;
    do @(posedge clk); while (!rsp.gnt);
    #1 req.req = 0;
    @(posedge clk);
    data = rsp.rdata;
    #1;
  endtask

  // ---------------------------------------------------------- NM-Caesar
  logic [31:0] cm [8192];
  logic [31:0] cacc = 0;
  sew_e csew = SEW32;
  task automatic caesar(caesar_op_e op, int unsigned d, int unsigned s1, int unsigned s2);
    logic [31:0] r;
    bus_write(CAESAR_BASE + d * 4, {op, 13'(s2), 13'(s1)});
    if (op == OP_CSRW) begin csew = sew_e'(s1); return; end
    if (s1[12] == s2[12]) n_same_bank++;
    r = exec(op, csew, cm[s1], cm[s2], cacc);
    if (op_writes(op)) cm[d] = r;
  endtask

  // ------------------------------------------------------- eCPU stand-in
  vrf_model m = new();
  task automatic xissue(logic [31:0] instr, logic [31:0] rs1, logic [31:0] rs2);
    x_valid = 1; x_instr = instr; x_rs1 = rs1; x_rs2 = rs2;
    do @(posedge clk); while (!x_ready);
    check(x_accept, "xvnmc instruction accepted");
    #1 x_valid = 0;
  endtask
  task automatic xresult(output logic [31:0] data);
    do @(posedge clk); while (!x_rvalid);
    data = x_rdata;
    #1;
  endtask

  logic kernel_done = 0;
  initial begin : ecpu
    logic [31:0] r;
    x_valid = 0; x_instr = 0; x_rs1 = 0; x_rs2 = 0; ecpu_req = '0;
    wait (fetch_en);
    @(posedge clk); #1;
    xissue(enc_vsetvli(5'd5, 5'd6, SEW8), 32'd1024, 0);
    xresult(r);
    check(r == m.setvl(1024, SEW8), "vsetvli");
    // v3+i += v0+i * 5 for i = 0..2, one instruction, indexes in rs2
    for (int unsigned i = 0; i < 3; i++) begin
      n_indirect++;
      xissue(enc(F6_VMACC, 1, 5'd9, 5'd6, F3_OPIVX, 5'd0), 32'd5,
             {8'd0, 8'(i), 8'd0, 8'(3 + i)});
      m.arith(V_MACC, 3 + i, i, 0, 0, 32'd5);
    end
    xissue(enc(F6_VSLIDE1DN, 0, 5'd3, 5'd6, F3_OPIVX, 5'd6), 32'h7f, 0);
    m.slide(V_SLIDE1DN, 6, 3, 32'h7f);
    xissue(enc(F6_EMVV, 0, 5'd2, 5'd1, F3_OPMVX, 5'd6), 32'h55, 32'd10);
    m.put(6, 10, 32'h55);
    xissue(enc(F6_EMVX, 0, 5'd6, 5'd1, F3_OPMVX, 5'd4), 32'd10, 0);
    xresult(r);
    n_emv++;
    check(r == 32'h55, "emvx reads the emvv value");
    while (vbusy) @(posedge clk);
    #1;
    ecpu_req = '{req: 1'b1, we: 1'b1, be: 4'hf, addr: 32'h1000, wdata: 32'h6};
    do @(posedge clk); while (!ecpu_rsp.gnt);
    #1 ecpu_req.req = 0;
    kernel_done = 1;
  end

  initial begin : host
    logic [31:0] rd;
    req = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // conventional bank
    for (int i = 0; i < 16; i++) bus_write(SRAM_BASE + i * 4, 32'hA000_0000 + i);
    for (int i = 0; i < 16; i++) begin
      bus_read(SRAM_BASE + i * 4, rd);
      check(rd == 32'hA000_0000 + i, "SRAM bank");
    end

    // NM-Caesar: operands in bank 0 (words 0..31) and bank 1 (4096..4127)
    for (int i = 0; i < 32; i++) begin
      cm[i] = $urandom; cm[4096 + i] = $urandom;
      bus_write(CAESAR_BASE + i * 4, cm[i]);
      bus_write(CAESAR_BASE + (4096 + i) * 4, cm[4096 + i]);
    end

    // NM-Carus: v0..v5
    for (int unsigned w = 0; w < 6 * 256; w++) begin
      logic [31:0] d;
      d = $urandom;
      m.set_word(w, d);
      bus_write(CARUS_BASE + w * 4, d);
    end
    for (int unsigned w = 6 * 256; w < 7 * 256; w++) m.set_word(w, 0);
    for (int unsigned w = 6 * 256; w < 7 * 256; w++) bus_write(CARUS_BASE + w * 4, 0);
    r_imc = 1;
    for (int i = 0; i < 4; i++) bus_write(CARUS_BASE + i * 4, 32'h0000_0013); // code image
    bus_write(CARUS_BASE + 32'h1000, 32'h5);                                 // start
    r_imc = 0;

    // NM-Caesar kernel while NM-Carus runs
    c_imc = 1;
    caesar(OP_CSRW, 0, 0, 0);                           // 8-bit elements
    for (int i = 0; i < 8; i++) caesar(OP_ADD, 64 + i, i, 4096 + i);
    caesar(OP_MAC_INIT, 0, 8, 4104);
    for (int i = 1; i < 7; i++) caesar(OP_MAC, 0, 8 + i, 4104 + i);
    caesar(OP_MAC_STORE, 4200, 15, 4111);
    caesar(OP_CSRW, 0, 1, 0);                           // 16-bit elements
    caesar(OP_DOT_INIT, 0, 16, 4112);
    caesar(OP_DOT, 0, 17, 4113);
    caesar(OP_DOT_STORE, 80, 18, 4114);
    caesar(OP_MAX, 4201, 20, 21);                       // same bank: slower issue
    c_imc = 0;
    while (c_busy) @(posedge clk);
    #1;
    foreach (cm[a]) if (a >= 64 && a < 72 || a == 80 || a == 4200 || a == 4201) begin
      bus_read(CAESAR_BASE + a * 4, rd);
      check(rd == cm[a], $sformatf("NM-Caesar word %0d = %h expected %h", a, rd, cm[a]));
    end

    // host reads NM-Carus data that the kernel does not write, while it runs
    for (int i = 0; i < 8; i++) begin
      bus_read(CARUS_BASE + (256 + i) * 4, rd);
      check(rd == m.word(256 + i), "NM-Carus read during kernel");
    end

    wait (kernel_done);
    @(posedge clk); #1;
    check(irq, "NM-Carus completion interrupt");
    for (int unsigned w = 0; w < 7 * 256; w++) begin
      bus_read(CARUS_BASE + w * 4, rd);
      check(rd == m.word(w), $sformatf("NM-Carus word %0d = %h expected %h", w, rd, m.word(w)));
    end

    $display("mode switches=%0d caesar stalls=%0d same-bank=%0d vpu stalls=%0d indirect=%0d emv=%0d irq=%0d",
             n_mode, n_caesar_stall, n_same_bank, n_vpu_stall, n_indirect, n_emv, n_irq);
    check(n_mode > 0, "mode switch happened");
    check(n_caesar_stall > 0, "NM-Caesar bus stall happened");
    check(n_same_bank > 0, "same-bank NM-Caesar instruction happened");
    check(n_vpu_stall > 0, "VPU stall by host access happened");
    check(n_indirect > 0, "indirect addressing used");
    check(n_emv > 0, "scalar-vector exchange happened");
    check(n_irq > 0, "interrupt raised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
