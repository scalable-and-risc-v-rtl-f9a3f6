// tb_nm_caesar: self-checking test of the NM-Caesar macro through its bus.
//
// Fills part of both banks in memory mode, reads it back, then streams
// random instructions in computing mode (all opcodes, all element widths,
// sources and destinations drawn from a small window so that read-after-
// write hazards and bank conflicts occur), and finally reads the window back
// in memory mode and compares with a reference model that executes the
// instructions one after the other. The issue rate is measured: one
// instruction every two cycles with sources in different banks, one every
// three cycles with both sources in one bank.
module tb_nm_caesar;
  import nmc_pkg::*;
  import caesar_pkg::*;
  import caesar_ref_pkg::*;

  localparam int unsigned BW = 4096;
  logic clk = 0, rst_n = 0, imc = 0;
  mem_req_t req;
  mem_rsp_t rsp;
  logic busy;
  int checks = 0, failures = 0;

  nm_caesar #(.BANK_WORDS(BW)) dut (.clk_i(clk), .rst_ni(rst_n), .imc_i(imc),
                                    .bus_req_i(req), .bus_rsp_o(rsp), .busy_o(busy));

  always #5 clk = ~clk;

  logic [31:0] model [int unsigned];
  logic [31:0] acc = 0;
  sew_e        sew = SEW32;
  int unsigned cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic bus_write(int unsigned waddr, logic [31:0] data, output int unsigned gcyc);
    req.req = 1; req.we = 1; req.be = 4'hf; req.addr = waddr << 2; req.wdata = data;
    do @(posedge clk); while (!rsp.gnt);
    gcyc = cyc;
    #1 req.req = 0;
  endtask

  task automatic bus_read(int unsigned waddr, output logic [31:0] data);
    req.req = 1; req.we = 0; req.be = 4'hf; req.addr = waddr << 2;
    do @(posedge clk); while (!rsp.gnt);
    #1 req.req = 0;
    @(posedge clk);
    data = rsp.rdata;
  endtask

  // Window of words used by the test: 16 words at the bottom of each bank.
  function automatic int unsigned pick(bit bank);
    return (bank ? BW : 0) + $urandom_range(0, 15);
  endfunction

  task automatic issue(caesar_op_e op, int unsigned d, int unsigned s1, int unsigned s2,
                       output int unsigned gcyc);
    logic [31:0] r;
    bus_write(d, {op, 13'(s2), 13'(s1)}, gcyc);
    if (op == OP_CSRW) return;
    r = exec(op, sew, model[s1], model[s2], acc);
    if (op_writes(op)) model[d] = r;
  endtask

  caesar_op_e ops [16] = '{OP_AND, OP_OR, OP_XOR, OP_ADD, OP_SUB, OP_MUL, OP_MAC_INIT,
                           OP_MAC, OP_MAC_STORE, OP_DOT_INIT, OP_DOT, OP_DOT_STORE,
                           OP_SLL, OP_SLR, OP_MIN, OP_MAX};
  int seen [caesar_op_e];

  initial begin
    int unsigned g0, g1;
    logic [31:0] rd;
    req = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // memory mode fill and read-back
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < 16; i++) begin
        model[b*BW + i] = $urandom;
        bus_write(b*BW + i, model[b*BW + i], g0);
      end
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < 16; i++) begin
        bus_read(b*BW + i, rd);
        checks++;
        if (rd !== model[b*BW + i]) begin
          failures++;
          $display("mem read mismatch %0d: %h vs %h", b*BW+i, rd, model[b*BW+i]);
        end
      end

    // computing mode: random instruction stream, every element width
    for (int i = 20; i < 28; i++) begin
      model[i] = $urandom; model[BW + i] = $urandom;
      bus_write(i, model[i], g0);
      bus_write(BW + i, model[BW + i], g0);
    end
    imc = 1;
    for (int s = 0; s < 3; s++) begin
      sew = sew_e'(s);
      issue(OP_CSRW, 0, s, 0, g0);
      for (int n = 0; n < 150; n++) begin
        caesar_op_e op;
        op = ops[$urandom_range(0, 15)];
        // MAC/DOT chains start with their INIT form for a defined accumulator
        if (n == 0) op = OP_MAC_INIT;
        seen[op]++;
        issue(op, pick($urandom_range(0, 1)), pick($urandom_range(0, 1)),
              pick($urandom_range(0, 1)), g0);
      end
    end

    // issue rate: sources in different banks, no hazards -> 2 cycles each
    issue(OP_CSRW, 0, 0, 0, g0);
    sew = SEW8;
    repeat (8) @(posedge clk);
    #1;
    issue(OP_ADD, 100, 20, BW + 21, g0);
    issue(OP_ADD, 101, 22, BW + 23, g1);
    checks++;
    if (g1 - g0 != 2) begin failures++; $display("diff-bank issue interval %0d", g1 - g0); end
    repeat (8) @(posedge clk);
    #1;
    issue(OP_ADD, BW + 100, 24, 25, g0);
    issue(OP_ADD, BW + 101, 26, 27, g1);
    checks++;
    if (g1 - g0 != 3) begin failures++; $display("same-bank issue interval %0d", g1 - g0); end

    // back to memory mode; check every word the instructions touched
    @(posedge clk); #1 imc = 0;
    while (busy) @(posedge clk);
    #1;
    foreach (model[a]) begin
      bus_read(a, rd);
      checks++;
      if (rd !== model[a]) begin
        failures++;
        $display("result mismatch word %0d: %h expected %h", a, rd, model[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
