// tb_caesar_alu: unit test of the NM-Caesar SIMD ALU.
//
// Drives random operations of every kind and every element width (8, 16,
// 32 bit), including MAC and DOT chains through the accumulator, with a new
// operation every two cycles as the controller issues them, and also
// back-to-back. Each result is compared with an independent element-wise
// reference (caesar_ref_pkg), and valid_o must rise exactly two cycles after
// valid_i: the ALU is a two-cycle unit that produces one result per two
// cycles in the macro.
module tb_caesar_alu;
  import nmc_pkg::*;
  import caesar_pkg::*;
  import caesar_ref_pkg::*;

  logic clk = 0, rst_n = 0, valid = 0, valid_o;
  caesar_op_e op = OP_AND;
  sew_e sew = SEW8;
  logic [31:0] a = 0, b = 0, result;
  int checks = 0, failures = 0;

  caesar_alu dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .op_i(op), .sew_i(sew),
                  .a_i(a), .b_i(b), .valid_o(valid_o), .result_o(result));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected results travel in a small queue with the cycle they are due
  logic [31:0] exp_q[$];
  bit          wr_q[$];
  int          due_q[$];
  int          cyc = 0;
  logic [31:0] acc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && valid_o) begin
      check(due_q.size() > 0 && due_q[0] == cyc, $sformatf("valid_o at cycle %0d", cyc));
      if (due_q.size() > 0) begin
        if (wr_q[0]) check(result == exp_q[0],
                           $sformatf("result %h expected %h", result, exp_q[0]));
        void'(due_q.pop_front()); void'(exp_q.pop_front()); void'(wr_q.pop_front());
      end
    end
  end

  task automatic issue(caesar_op_e o, sew_e s, int gap);
    #1;
    valid = 1; op = o; sew = s; a = $urandom; b = $urandom;
    if (o inside {OP_SLL, OP_SLR}) b = $urandom_range(0, 255) * 32'h0101_0101 & 32'h1f1f_1f1f;
    exp_q.push_back(exec(o, s, a, b, acc));
    wr_q.push_back(op_writes(o));
    due_q.push_back(cyc + 2);
    @(posedge clk);
    #1 valid = 0;
    repeat (gap) @(posedge clk);
  endtask

  initial begin
    static caesar_op_e ops[10] = '{OP_AND, OP_OR, OP_XOR, OP_ADD, OP_SUB, OP_MUL, OP_SLL, OP_SLR,
                            OP_MIN, OP_MAX};
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    for (int s = 0; s < 3; s++) begin
      for (int n = 0; n < 200; n++) issue(ops[$urandom_range(0, 9)], sew_e'(s), $urandom_range(0, 1));
      for (int k = 0; k < 10; k++) begin
        int len;
        len = $urandom_range(0, 4);
        issue(OP_MAC_INIT, sew_e'(s), 1);
        for (int j = 0; j < len; j++) issue(OP_MAC, sew_e'(s), 1);
        issue(OP_MAC_STORE, sew_e'(s), 1);
        issue(OP_DOT_INIT, sew_e'(s), 1);
        for (int j = 0; j < len; j++) issue(OP_DOT, sew_e'(s), 1);
        issue(OP_DOT_STORE, sew_e'(s), 1);
      end
    end
    repeat (4) @(posedge clk);
    check(due_q.size() == 0, "every operation produced a result");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
