// tb_nm_carus: self-checking test of the NM-Carus macro.
//
// The host fills eight vector registers through the memory-mode port, loads
// a few words into the code memory and starts a kernel through the
// configuration register. A behavioural stand-in for the eCPU (the real
// core is not part of the RTL) then plays a kernel: vsetvli for every
// element width, random arithmetic, logic, shift, min/max, move and slide
// instructions in direct and indirect form, emvv/emvx exchanges, and
// vmacc.vx sweeps whose cycle counts are checked against the lane
// throughput (1, 0.67 and 0.33 MAC per cycle and lane for 8, 16 and 32 bit).
// During one long instruction the host reads the VRF in memory mode, which
// stalls the VPU. Finally the stand-in writes the done bit, the interrupt is
// checked, and the host reads all registers back and compares them with the
// reference model.
module tb_nm_carus;
  import nmc_pkg::*;
  import carus_pkg::*;
  import carus_ref_pkg::*;

  logic clk = 0, rst_n = 0, imc = 0;
  mem_req_t req, ecpu_req;
  mem_rsp_t rsp, ecpu_rsp;
  logic irq, fetch_en, x_valid, x_ready, x_accept, x_rvalid, vbusy;
  logic [31:0] x_instr, x_rs1, x_rs2, x_rdata;
  logic [4:0]  x_rd;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  int unsigned stalls = 0;

  nm_carus dut (
    .clk_i(clk), .rst_ni(rst_n), .imc_i(imc), .bus_req_i(req), .bus_rsp_o(rsp), .irq_o(irq),
    .ecpu_fetch_enable_o(fetch_en), .ecpu_req_i(ecpu_req), .ecpu_rsp_o(ecpu_rsp),
    .x_valid_i(x_valid), .x_ready_o(x_ready), .x_instr_i(x_instr), .x_rs1_i(x_rs1),
    .x_rs2_i(x_rs2), .x_accept_o(x_accept), .x_result_valid_o(x_rvalid),
    .x_result_rd_o(x_rd), .x_result_data_o(x_rdata), .vpu_busy_o(vbusy));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (req.req && !imc && vbusy) stalls++;
  end

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  vrf_model m = new();

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ host port
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

  // ------------------------------------------------------- eCPU stand-in
  task automatic xissue(logic [31:0] instr, logic [31:0] rs1, logic [31:0] rs2);
    x_valid = 1; x_instr = instr; x_rs1 = rs1; x_rs2 = rs2;
    do @(posedge clk); while (!x_ready);
    check(x_accept, $sformatf("instruction %h accepted", instr));
    #1 x_valid = 0;
  endtask
  task automatic xresult(output logic [31:0] data);
    do @(posedge clk); while (!x_rvalid);
    data = x_rdata;
    #1;
  endtask
  task automatic wait_idle();
    @(posedge clk);
    while (vbusy) @(posedge clk);
    #1;
  endtask
  task automatic setvl(int unsigned avl, sew_e s);
    logic [31:0] r;
    xissue(enc_vsetvli(5'd5, 5'd6, s), avl, 0);
    xresult(r);
    check(r == m.setvl(avl, s), $sformatf("vsetvli returned %0d", r));
  endtask

  vop_e        aops [15] = '{V_ADD, V_SUB, V_MUL, V_MACC, V_AND, V_OR, V_XOR, V_MIN, V_MINU,
                             V_MAX, V_MAXU, V_SLL, V_SRL, V_SRA, V_MV};
  funct6_e     af6  [15] = '{F6_VADD, F6_VSUB, F6_VMUL, F6_VMACC, F6_VAND, F6_VOR, F6_VXOR,
                             F6_VMIN, F6_VMINU, F6_VMAX, F6_VMAXU, F6_VSLL, F6_VSRL,
                             F6_VSRA, F6_VMV};
  int          n_indirect = 0, n_slide = 0, n_emv = 0;

  task automatic random_arith();
    int k = $urandom_range(0, 14);
    int form = $urandom_range(0, 2);                 // vv, vx, vi
    int unsigned vd = $urandom_range(0, 7), vs1 = $urandom_range(0, 7), vs2 = $urandom_range(0, 7);
    bit ind = $urandom_range(0, 1);
    logic [31:0] sc = $urandom;
    logic [4:0] f1;
    funct3_e f3;
    if (form == 2 && !(aops[k] inside {V_ADD, V_AND, V_OR, V_XOR, V_SLL, V_SRL, V_SRA, V_MV}))
      form = 1;
    if (form == 2) begin
      f1 = 5'($urandom);
      sc = (aops[k] inside {V_SLL, V_SRL, V_SRA}) ? 32'(f1) : 32'(signed'(f1));
    end else begin
      f1 = ind ? 5'd7 : 5'(vs1);
    end
    f3 = (form == 0) ? F3_OPIVV : (form == 1) ? F3_OPIVX : F3_OPIVI;
    if (ind) n_indirect++;
    // indirect: indexes in rs2 = {vs2, vs1, vd}; the vs2 field names rs2
    xissue(enc(af6[k], ind, ind ? 5'd9 : 5'(vs2), f1, f3, ind ? 5'd0 : 5'(vd)),
           (form == 0) ? 32'(vs1) : sc, {8'd0, 8'(vs2), 8'(vs1), 8'(vd)});
    m.arith(aops[k], vd, (aops[k] == V_MV) ? 0 : vs2, vs1, form == 0, sc);
  endtask

  task automatic random_slide();
    vop_e op;
    funct6_e f6;
    int unsigned vd = $urandom_range(0, 3), vs2 = $urandom_range(4, 7);
    logic [31:0] sc;
    int sel = $urandom_range(0, 3);
    op = (sel == 0) ? V_SLIDEUP : (sel == 1) ? V_SLIDEDN : (sel == 2) ? V_SLIDE1UP : V_SLIDE1DN;
    f6 = (sel == 0) ? F6_VSLIDEUP : (sel == 1) ? F6_VSLIDEDN : (sel == 2) ? F6_VSLIDE1UP
                                                            : F6_VSLIDE1DN;
    sc = (sel < 2) ? $urandom_range(0, 9) : $urandom;
    n_slide++;
    xissue(enc(f6, 0, 5'(vs2), 5'd3, F3_OPIVX, 5'(vd)), sc, 0);
    m.slide(op, vd, vs2, sc);
  endtask

  task automatic emv_pair();
    int unsigned i = $urandom_range(0, m.vl - 1), v = $urandom_range(0, 7);
    logic [31:0] val = $urandom, r, e;
    n_emv++;
    xissue(enc(F6_EMVV, 0, 5'd2, 5'd1, F3_OPMVX, 5'(v)), val, i);     // v[i] <- val
    m.put(v, i, val);
    i = $urandom_range(0, m.vl - 1);
    xissue(enc(F6_EMVX, 0, 5'(v), 5'd1, F3_OPMVX, 5'd4), i, 0);       // x4 <- v[i]
    xresult(r);
    e = 32'(m.sx(m.get(v, i)));
    check(r == e, $sformatf("emvx v%0d[%0d] = %h expected %h", v, i, r, e));
  endtask

  // vmacc.vx over a full register; returns busy cycles
  task automatic macc_sweep(sew_e s, output int unsigned cycles);
    int unsigned c0;
    setvl(VLEN, s);
    wait_idle();
    c0 = cyc;
    xissue(enc(F6_VMACC, 0, 5'd1, 5'd3, F3_OPIVX, 5'd0), 32'd3, 0);
    wait_idle();
    cycles = cyc - c0;
    m.arith(V_MACC, 0, 1, 0, 0, 32'd3);
  endtask

  initial begin
    logic [31:0] rd;
    int unsigned cycles, expect_c;
    req = '0; ecpu_req = '0; x_valid = 0; x_instr = 0; x_rs1 = 0; x_rs2 = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // host fills v0..v7 (memory mode, word w of the 32 KiB space)
    for (int unsigned w = 0; w < 8 * 256; w++) begin
      logic [31:0] d;
      d = $urandom;
      m.set_word(w, d);
      bus_write(w * 4, d);
    end
    for (int unsigned w = 0; w < 8 * 256; w += 37) begin
      bus_read(w * 4, rd);
      check(rd == m.word(w), $sformatf("memory read word %0d", w));
    end

    // configuration mode: code memory and start
    imc = 1;
    for (int i = 0; i < 8; i++) bus_write(i * 4, 32'h1000_0000 + i);
    for (int i = 0; i < 8; i++) begin
      bus_read(i * 4, rd);
      check(rd == 32'h1000_0000 + i, "eMEM read back");
    end
    check(!fetch_en, "eCPU idle before start");
    bus_write(32'h1000, 32'h5);                      // start, irq enabled
    @(posedge clk);
    check(fetch_en, "start bit enables the eCPU");
    check(!irq, "no interrupt before done");
    imc = 0;

    // the kernel, played by the eCPU stand-in
    for (int s = 0; s < 3; s++) begin
      setvl($urandom_range(1, VLEN / (1 << s)), sew_e'(s));
      for (int n = 0; n < 40; n++) random_arith();
      for (int n = 0; n < 6; n++) random_slide();
      for (int n = 0; n < 4; n++) emv_pair();
      // an odd vl exercises the tail of the last word
      setvl(5, sew_e'(s));
      for (int n = 0; n < 6; n++) random_arith();
    end

    // throughput: (rows + 2) periods of 4/3/3 cycles, plus one dispatch cycle
    macc_sweep(SEW8, cycles);
    expect_c = (256 / 4 + 2) * 4 + 1;
    check(cycles >= expect_c && cycles <= expect_c + 2,
          $sformatf("vmacc.vx 8-bit took %0d cycles, expected %0d", cycles, expect_c));
    macc_sweep(SEW16, cycles);
    expect_c = (256 / 4 + 2) * 3 + 1;
    check(cycles >= expect_c && cycles <= expect_c + 2,
          $sformatf("vmacc.vx 16-bit took %0d cycles, expected %0d", cycles, expect_c));
    macc_sweep(SEW32, cycles);
    check(cycles >= expect_c && cycles <= expect_c + 2,
          $sformatf("vmacc.vx 32-bit took %0d cycles, expected %0d", cycles, expect_c));

    // host reads the VRF while a vector instruction runs (VPU stalls)
    setvl(VLEN, SEW8);
    xissue(enc(F6_VADD, 0, 5'd1, 5'd2, F3_OPIVV, 5'd2), 32'd1, 0);
    m.arith(V_ADD, 2, 1, 2, 1, 0);
    for (int i = 0; i < 20; i++) begin
      bus_read((3 * 256 + i) * 4, rd);
      check(rd == m.word(3 * 256 + i), "host read during kernel");
    end
    wait_idle();
    check(stalls > 0, "host access stalled the VPU");

    // kernel end: eCPU sets done through its bus port
    ecpu_req = '{req: 1'b1, we: 1'b1, be: 4'hf, addr: 32'h1000, wdata: 32'h6};
    do @(posedge clk); while (!ecpu_rsp.gnt);
    #1 ecpu_req.req = 0;
    @(posedge clk);
    check(irq, "done raises the interrupt");
    check(!fetch_en, "done clears the start bit");
    imc = 1;
    bus_read(32'h1000, rd);
    check(rd[1], "done visible to the host");
    // register writes must not have touched the code memory
    for (int i = 0; i < 8; i++) begin
      bus_read(i * 4, rd);
      check(rd == 32'h1000_0000 + i, "eMEM intact after register writes");
    end
    imc = 0;

    // full read-back
    for (int unsigned w = 0; w < 8 * 256; w++) begin
      bus_read(w * 4, rd);
      check(rd == m.word(w), $sformatf("VRF word %0d = %h expected %h", w, rd, m.word(w)));
    end
    $display("indirect=%0d slides=%0d emv=%0d stalls=%0d", n_indirect, n_slide, n_emv, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
